// tb_agc: the gain decision and its hold time.
//   * weak noise (|I|+|Q| < 256): gain 0, never locked, output = input;
//   * a packet at level 500: after 64 samples gain 4 (500*16 = 8000 < 8192),
//     output = 16 x input, locked for 768 samples, then back to gain 0;
//   * a packet at level 3000: gain 1; a packet at 20000: gain 0;
//   * saturation: level 3000 with gain 1 plus a spike of 30000 clips at
//     32767.
// Expected gains come from the rule peak * 2^g < 2 * 4096.
module tb_agc;
  import pco_pkg::*;
  logic clk = 0, rst_n = 0;
  sample_t in_i = 0, in_q = 0, out_i, out_q;
  logic [3:0] gain;
  logic locked;
  int checks = 0, failures = 0;

  agc dut (.clk, .rst_n, .in_i, .in_q, .out_i, .out_q, .gain, .locked);

  always #12.5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // IF-like samples of a given level: (a,0), (0,a), (-a,0), (0,-a) with random signs
  task automatic packet(input int level, input int exp_gain, input bit spike);
    int locked_cycles, n;
    sample_t pi, pq;
    locked_cycles = 0;
    for (n = 0; n < 800; n++) begin
      int a;
      a = ($urandom % 2) ? level : -level;
      if (spike && n == 400) a = 30000;
      in_i = (n % 2 == 0) ? sample_t'(a) : 0;
      in_q = (n % 2 == 1) ? sample_t'(a) : 0;
      pi = in_i; pq = in_q;
      @(negedge clk);
      if (locked) begin
        locked_cycles++;
        chk(gain == 4'(exp_gain), $sformatf("level %0d gain %0d exp %0d", level, gain, exp_gain));
        if (locked_cycles > 1) begin : scaled   // the first locked output used the old gain
          longint ei, eq;
          ei = longint'(pi) <<< gain; eq = longint'(pq) <<< gain;
          if (ei > 32767) ei = 32767;
          if (ei < -32768) ei = -32768;
          if (eq > 32767) eq = 32767;
          if (eq < -32768) eq = -32768;
          chk(out_i == sample_t'(ei) && out_q == sample_t'(eq), $sformatf("scaled output %0d for %0d", out_i, pi));
        end
      end
      if (n == 66) chk(locked, "locked after the measurement window");
    end
    in_i = 0; in_q = 0;
    repeat (300) begin
      @(negedge clk);
      if (locked) locked_cycles++;
    end
    chk(locked_cycles == 768, $sformatf("hold length %0d", locked_cycles));
    chk(!locked && gain == 0, "back to idle");
  endtask

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk); rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      in_i = sample_t'(int'($urandom % 200) - 100);
      in_q = sample_t'(int'($urandom % 100) - 50);
      @(negedge clk);
      if (locked || gain != 0) begin failures++; checks++; break; end
    end
    checks++;
    in_i = 0; in_q = 0; @(negedge clk); @(negedge clk);
    chk(out_i == 0, "pass-through in idle");
    packet(500, 4, 0);
    packet(3000, 1, 0);
    packet(20000, 0, 0);
    packet(3000, 1, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
