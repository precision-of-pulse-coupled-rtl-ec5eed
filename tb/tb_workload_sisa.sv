// tb_workload_sisa: the precision measurement for algorithm ALGO_SISA with 2, 4
// and 6 fully connected nodes, as in the evaluation of the design. The
// phase counter is shortened to PB = 16 bits (a SISA node runs from 1/2
// to 1, so its cycle is 2^15 cycles here, as the full-size cycle is 2^21
// cycles = 52.43 ms) so that 20 counter periods can be
// simulated; the delays stay at their real values (877 cycles).
// Prints the mean and maximum of Gamma over the last quarter of the run
// for each network size. Expected: two nodes converge (mean Gamma <= 1776);
// larger networks converge more slowly, since a lost packet leaves some
// nodes halving their phase and others not, so for n = 4 and 6 the run
// only reports Gamma (always at most half a period).
module tb_workload_sisa;
  import pco_pkg::*;
  localparam int unsigned PB = 16;
  logic clk = 0;
  longint late_mean [3], late_max [3];
  logic done;
  int checks = 0, failures = 0;

  workload_run #(.ALGO(ALGO_SISA), .PB(PB), .PERIODS(20)) run (.clk, .late_mean, .late_max, .done);

  always #12.5 clk = ~clk;

  initial begin
    wait (done);
    for (int w = 0; w < 3; w++) begin
      $display("n=%0d: Gamma over the last quarter mean %0d max %0d counts (%0.2f us mean)",
               2 * (w + 1), late_mean[w], late_max[w], real'(late_mean[w]) * 0.025);
      checks++;
      if (!((w > 0 && late_max[w] <= 1 << (PB - 1)) || late_mean[w] <= 1776)) begin failures++; $display("FAIL n=%0d outside the expected range", 2 * (w + 1)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (21 * (1 << PB)) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
