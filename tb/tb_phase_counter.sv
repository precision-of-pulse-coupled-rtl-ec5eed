// tb_phase_counter: checks the 22-bit wrap-around phase counter at its full
// size. After reset the count must equal the number of clock cycles since
// reset, modulo 2^22, through one complete wrap (4,194,304 cycles, one
// 104.86 ms oscillator period at 40 MHz), and the wrap must happen exactly
// after 2^22 cycles.
module tb_phase_counter;
  localparam int unsigned PB = 22;
  logic clk = 0, rst_n = 0;
  logic [PB-1:0] count;
  int checks = 0, failures = 0;
  longint n;

  phase_counter dut (.clk, .rst_n, .count);

  always #12.5 clk = ~clk;

  initial begin
    repeat (200_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    #1;
    checks++; if (count !== 0) begin failures++; $display("count in reset %0d", count); end
    rst_n <= 1;   // the next edge is the first one that counts
    for (n = 1; n <= (longint'(1) << PB) + 1000; n++) begin
      @(posedge clk); #1;
      if (n % 997 == 0 || n == (longint'(1) << PB) - 1 || n == (longint'(1) << PB)) begin
        checks++;
        if (count !== PB'(n)) begin
          failures++;
          if (failures < 10) $display("n=%0d count=%0d", n, count);
        end
      end
    end
    // reset again in mid count
    rst_n <= 0; @(posedge clk); rst_n <= 1; #1;
    checks++; if (count !== 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
