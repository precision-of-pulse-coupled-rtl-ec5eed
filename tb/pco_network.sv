// pco_network: NN pco_radio nodes joined by a behavioural radio channel, for
// testbenches only (not synthesizable: real arithmetic).
//
// Channel from node s to node r: the IF samples tx_i/tx_q of s are delayed
// by CH_DELAY cycles, scaled by GAIN, rotated by a carrier frequency offset
// of (s - r) * CFO_STEP Hz, summed over all senders and given a little
// uniform noise. A node that is transmitting hears nothing (its antenna
// switch is on transmit). Each packet is lost on each link with probability
// LOSS_PCT percent, decided when the sender starts it. Node k leaves reset
// at cycle rst_at[k], which gives the nodes different initial phases, and
// loads c_i = ci_val[k] right after reset. The clock is common and ideal.
module pco_network
  import pco_pkg::*;
#(
  parameter int          NN         = 3,
  parameter algo_e       ALGO       = ALGO_IES_STAR,
  parameter int unsigned PHASE_BITS = 16,
  parameter int          CH_DELAY   = 100,
  parameter real         GAIN       = 0.06,
  parameter real         CFO_STEP   = 7.0e3,
  parameter int          LOSS_PCT   = 0,
  parameter int          NOISE      = 20
) (
  input  logic                  clk,
  input  int                    rst_at [NN],
  input  longint                ci_val [NN],
  input  longint                now,
  output logic [PHASE_BITS-1:0] phase [NN],
  output logic [NN-1:0]         fire,
  output logic [NN-1:0]         tx_trigger,
  output logic [NN-1:0]         sync_det,
  output logic [NN-1:0]         upd,
  output logic [NN-1:0]         tr_tx,
  output logic [NN-1:0]         in_reset
);
  localparam real PI = 3.141592653589793;
  localparam int W = PHASE_BITS + 32;

  sample_t     tx_i [NN], tx_q [NN], rx_i [NN], rx_q [NN];
  logic [NN-1:0] rst_n, ci_we;
  logic [W-1:0]  ci_wdata [NN];
  logic [3:0]    rx_gain [NN];
  logic [W-1:0]  ci_rd [NN];
  int            dl_i [NN][CH_DELAY], dl_q [NN][CH_DELAY];
  int            ptr = 0;
  bit            drop [NN][NN];
  logic [NN-1:0] tr_prev = '0;

  for (genvar k = 0; k < NN; k++) begin : g_node
    pco_radio #(.ALGO(ALGO), .PHASE_BITS(PHASE_BITS), .CORR_FRAC_BITS(32),
                .LFSR_SEED(32'hACE1_2B5D ^ (32'(k) * 32'h9E37_79B9))) u_node (
      .clk, .rst_n(rst_n[k]), .rx_i(rx_i[k]), .rx_q(rx_q[k]), .tx_i(tx_i[k]), .tx_q(tx_q[k]),
      .tr_tx(tr_tx[k]), .rx_gain(rx_gain[k]), .ci_we(ci_we[k]), .ci_wdata(ci_wdata[k]),
      .ci(ci_rd[k]), .phase(phase[k]), .fire(fire[k]), .tx_trigger(tx_trigger[k]),
      .sync_detected(sync_det[k]), .phase_update(upd[k]));
    assign rst_n[k]    = now >= longint'(rst_at[k]);
    assign in_reset[k] = !rst_n[k];
    assign ci_we[k]    = now == longint'(rst_at[k]);
    assign ci_wdata[k] = W'(ci_val[k]);
  end

  initial begin
    foreach (dl_i[a, b]) begin dl_i[a][b] = 0; dl_q[a][b] = 0; end
    foreach (drop[a, b]) drop[a][b] = 0;
    foreach (rx_i[a]) begin rx_i[a] = 0; rx_q[a] = 0; end
  end

  always @(posedge clk) begin
    real acc_i, acc_q, th;
    for (int r = 0; r < NN; r++) begin
      acc_i = 0.0; acc_q = 0.0;
      for (int s = 0; s < NN; s++) begin
        if (s != r && !drop[s][r] && (dl_i[s][ptr] != 0 || dl_q[s][ptr] != 0)) begin
          th = 2.0 * PI * real'(s - r) * CFO_STEP * real'(now) / 40.0e6;
          acc_i += GAIN * (real'(dl_i[s][ptr]) * $cos(th) - real'(dl_q[s][ptr]) * $sin(th));
          acc_q += GAIN * (real'(dl_i[s][ptr]) * $sin(th) + real'(dl_q[s][ptr]) * $cos(th));
        end
      end
      if (tr_tx[r]) begin acc_i = 0.0; acc_q = 0.0; end
      rx_i[r] <= sample_t'($rtoi(acc_i) + int'($urandom % (2 * NOISE + 1)) - NOISE);
      rx_q[r] <= sample_t'($rtoi(acc_q) + int'($urandom % (2 * NOISE + 1)) - NOISE);
    end
    for (int s = 0; s < NN; s++) begin
      dl_i[s][ptr] = int'(tx_i[s]);
      dl_q[s][ptr] = int'(tx_q[s]);
      if (tr_tx[s] && !tr_prev[s])
        for (int r = 0; r < NN; r++) drop[s][r] = int'($urandom % 100) < LOSS_PCT;
    end
    tr_prev <= tr_tx;
    ptr = (ptr + 1) % CH_DELAY;
  end
endmodule
