// tb_workload_ies: the precision measurement for algorithm ALGO_IES with 2, 4
// and 6 fully connected nodes, as in the evaluation of the design. The
// phase counter is shortened to PB bits so that 20 periods can be
// simulated; the delays stay at their real values (877 cycles).
// Prints the mean and maximum of Gamma over the last quarter of the run
// for each network size. Expected: with the shift applied exactly as
// H(phi) = H~(phi - tau mod 1) + tau the nodes settle about h(tau_max) =
// 888 counts apart (see the design notes), so the check is Gamma <= 1776,
// twice that offset, over the last quarter.
module tb_workload_ies;
  import pco_pkg::*;
  localparam int unsigned PB = 16;
  logic clk = 0;
  longint late_mean [3], late_max [3];
  logic done;
  int checks = 0, failures = 0;

  workload_run #(.ALGO(ALGO_IES), .PB(PB), .PERIODS(20)) run (.clk, .late_mean, .late_max, .done);

  always #12.5 clk = ~clk;

  initial begin
    wait (done);
    for (int w = 0; w < 3; w++) begin
      $display("n=%0d: Gamma over the last quarter mean %0d max %0d counts (%0.2f us mean)",
               2 * (w + 1), late_mean[w], late_max[w], real'(late_mean[w]) * 0.025);
      checks++;
      if (!(late_max[w] <= 1776)) begin failures++; $display("FAIL n=%0d outside the expected range", 2 * (w + 1)); end
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
