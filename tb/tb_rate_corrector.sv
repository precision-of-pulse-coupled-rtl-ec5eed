// tb_rate_corrector: loads phase rate corrections c_i and checks that the
// integer output equals floor(k * c_i) after k cycles (computed by
// multiplication in the testbench, not by accumulation). Includes the
// paper's largest measured deviation: c_i = -6 ppm must remove 6 counts per
// million cycles, and a positive term.
module tb_rate_corrector;
  localparam int unsigned PB = 22, FB = 32, W = PB + FB;
  logic clk = 0, rst_n = 0, ci_we = 0;
  logic [W-1:0] ci_wdata = '0, ci;
  logic [PB-1:0] corr;
  int checks = 0, failures = 0;

  rate_corrector dut (.clk, .rst_n, .ci_we, .ci_wdata, .ci, .corr);

  always #12.5 clk = ~clk;

  initial begin
    repeat (10_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input longint c, input longint cycles);
    longint k, expv;
    rst_n <= 0; @(posedge clk); rst_n <= 1;
    ci_we <= 1; ci_wdata <= W'(c); @(posedge clk); ci_we <= 0;
    #1;
    checks++; if (ci !== W'(c)) failures++;
    // ci is in place; the accumulator adds it from this edge on
    for (k = 1; k <= cycles; k++) begin
      @(posedge clk); #1;
      if (k % 1001 == 0 || k == cycles) begin
        // floor(k*c / 2^FB), arithmetic shift of a signed 64-bit product
        expv = (k * c) >>> FB;
        checks++;
        if (corr !== PB'(expv)) begin
          failures++;
          if (failures < 10) $display("c=%0d k=%0d corr=%0d exp=%0d", c, k, corr, PB'(expv));
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    // -6 ppm: -6e-6 * 2^32 = -25770; after 999,000 cycles 5.994 counts are removed
    run(-25770, 999_000);
    checks++; if (corr !== PB'(-6)) begin failures++; $display("-6 ppm gave %0d", $signed(corr)); end
    run(64'd1 << 30, 5000);               // +1/4 count per cycle
    checks++; if (corr !== PB'(1250)) failures++;
    run(7_730_941, 20000);                // +1800 ppm (positive, fractional)
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
