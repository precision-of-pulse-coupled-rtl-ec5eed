// workload_run: testbench helper that runs one of the measurement setups:
// networks of 2, 4 and 6 nodes with algorithm ALGO, side by side, from
// random initial phases for PERIODS oscillator periods, and reports the
// precision Gamma over the last quarter. Each network uses pco_network's
// channel (877-cycle total delay, carrier offsets, 5 % packet loss).
// done rises at the end; the Gamma statistics are then valid. Node counts
// and random start phases follow the published measurements; the channel
// and the shortened phase are this testbench's choices.
module workload_run
  import pco_pkg::*;
#(
  parameter algo_e       ALGO    = ALGO_IES_STAR,
  parameter int unsigned PB      = 16,
  parameter int          PERIODS = 20
) (
  input  logic   clk,
  output longint late_mean [3],
  output longint late_max [3],
  output logic   done
);
  localparam longint ONE = longint'(1) << PB;
  longint now = 0;
  longint gam_now [3];
  longint t_late;

  always @(posedge clk) now <= now + 1;
  assign done   = now >= PERIODS * ONE;
  assign t_late = (PERIODS * 3 / 4) * ONE;

  for (genvar w = 0; w < 3; w++) begin : g_net
    localparam int NN = 2 * (w + 1);
    int rst_at [NN];
    longint ci_val [NN];
    logic [PB-1:0] phase [NN];
    logic [NN-1:0] fire, trig, det, upd, tr_tx, in_reset;
    initial
      for (int k = 0; k < NN; k++) begin
        rst_at[k] = 10 + int'($urandom % ONE);
        ci_val[k] = 0;
      end
    pco_network #(.NN(NN), .ALGO(ALGO), .PHASE_BITS(PB), .CH_DELAY(99), .LOSS_PCT(5)) net (
      .clk, .rst_at, .ci_val, .now, .phase, .fire, .tx_trigger(trig), .sync_det(det),
      .upd, .tr_tx, .in_reset);
    gamma_monitor #(.NN(NN), .PB(PB)) mon (
      .clk, .phase, .in_reset, .now, .t_late, .gam_now(gam_now[w]),
      .late_max(late_max[w]), .late_mean(late_mean[w]));
  end
endmodule
