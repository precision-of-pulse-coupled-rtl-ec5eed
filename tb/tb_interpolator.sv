// tb_interpolator: random symbols every 8 cycles. After each edge the output
// must be s0 + floor((s1 - s0) * m / 8), m = 0..7 counting the cycles since
// the segment began, s0 and s1 being the two most recent symbols (the
// symbol given at edge k is the segment end from edge k+1 on). After the
// stream stops the output must fall back to 0 within 18 cycles.
module tb_interpolator;
  import pco_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0;
  sample_t in_sym = 0, out;
  int checks = 0, failures = 0;
  int syms [200];

  interpolator dut (.clk, .rst_n, .in_valid, .in_sym, .out);

  always #12.5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int s0, s1, expv;
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (3) @(posedge clk);
    foreach (syms[j]) syms[j] = ($urandom % 2) ? int'($urandom % 16384) - 8192 : (($urandom % 2) ? 8191 : -8191);
    @(negedge clk);
    for (int j = 0; j < 200; j++) begin
      in_valid = 1; in_sym = sample_t'(syms[j]);
      @(negedge clk);
      in_valid = 0;
      // output after the edge following the load: segment from syms[j-1] to syms[j]
      s0 = (j == 0) ? 0 : syms[j-1];
      s1 = syms[j];
      for (int m = 0; m < 8; m++) begin
        // out is registered: the value for m shows one edge after m is reached
        @(negedge clk);
        expv = s0 + ((s1 - s0) * m >>> 3);
        checks++;
        if (out !== sample_t'(expv)) begin
          failures++;
          if (failures < 10) $display("j=%0d m=%0d out=%0d exp=%0d", j, m, out, expv);
        end
        if (m == 6) break;   // the next symbol is presented at this negedge
      end
    end
    in_valid = 0;
    repeat (18) @(negedge clk);
    checks++; if (out !== 0) begin failures++; $display("tail %0d", out); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
