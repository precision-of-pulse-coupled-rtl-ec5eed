// tb_pco_radio: end-to-end test of the radio node. Three nodes with the
// default algorithm (IES*) run over the behavioural channel of pco_network,
// starting from random phases. The phase counter is shortened to 16 bits
// (one period = 65,536 cycles = 1.64 ms instead of 104.86 ms) so that many
// periods can be simulated; all other parameters are the defaults.
// The test measures:
//   * tau, the time from a tx trigger to the sync detection at a neighbour:
//     it must lie within the algorithm's [tau_min, tau_max] = [868, 888]
//     cycles, which the channel delay is chosen to give;
//   * the precision Gamma = max over pairs of the circular phase distance.
//     Starting from random phases (Gamma up to half a period) it must settle
//     and, over the last quarter of the run, stay below 2 h(tau_max) = 1776
//     counts. With the response function taken literally from its formulas
//     the relative phase of two nodes settles near h(tau_max) (888 counts,
//     22 us), not near zero; see the design notes;
//   * how often each mechanism happened: packets sent, firings without a
//     packet (p = 1/2), firings silenced by the IES* quiet window, sync
//     detections, receptions ignored in the refractory interval, phase
//     updates, updates that carried the phase through one, AGC locks and
//     rate correction steps. Each must happen at least once.
module tb_pco_radio;
  import pco_pkg::*;
  localparam int NN = 3;
  localparam int PB = 16;
  localparam longint ONE = longint'(1) << PB;
  localparam int PERIODS = 60;

  logic clk = 0;
  longint now = 0;
  int rst_at [NN];
  longint ci_val [NN];
  logic [PB-1:0] phase [NN];
  logic [NN-1:0] fire, trig, det, upd, tr_tx, in_reset;
  int checks = 0, failures = 0;

  // mechanism counters
  int n_tx = 0, n_silent = 0, n_quiet = 0, n_det = 0, n_refr = 0, n_upd = 0,
      n_carry = 0, n_agc = 0, n_corr = 0;
  longint last_trig [NN];
  logic [PB-1:0] corr_prev = '0;
  longint tau_min_seen = 1 << 30, tau_max_seen = 0;
  longint gam, gam_late_max = 0, gam_sum = 0, gam_n = 0;

  pco_network #(.NN(NN), .PHASE_BITS(PB), .CH_DELAY(99), .LOSS_PCT(5)) net (
    .clk, .rst_at, .ci_val, .now, .phase, .fire, .tx_trigger(trig), .sync_det(det),
    .upd, .tr_tx, .in_reset);

  always #12.5 clk = ~clk;

  initial begin
    repeat (PERIODS * ONE + 2 * ONE) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint circ(input longint a, input longint b);
    longint d;
    d = (a > b) ? a - b : b - a;
    return (d < ONE - d) ? d : ONE - d;
  endfunction

  always @(posedge clk) now <= now + 1;

  // observe just before each edge
  always @(negedge clk) begin
    if (in_reset == 0) begin
      for (int k = 0; k < NN; k++) begin
        if (trig[k]) begin n_tx++; last_trig[k] = now; end
        if (fire[k] && !trig[k]) n_silent++;
        if (det[k]) begin
          longint best;
          int cand;
          n_det++;
          // tau is measured on clean receptions: exactly one neighbour
          // triggered a packet that can have ended by now (768..1100 cycles ago)
          cand = 0; best = 0;
          for (int s = 0; s < NN; s++)
            if (s != k && now - last_trig[s] >= 768 && now - last_trig[s] <= 1100) begin
              cand++; best = now - last_trig[s];
            end
          if (cand == 1) begin
            if (best < tau_min_seen) tau_min_seen = best;
            if (best > tau_max_seen) tau_max_seen = best;
          end
          if (!upd[k]) n_refr++;
        end
        if (upd[k]) n_upd++;
      end
      if (fire[0] && net.g_node[0].u_node.u_osc.u_emit.quiet != 0) n_quiet++;
      if (fire[1] && net.g_node[1].u_node.u_osc.u_emit.quiet != 0) n_quiet++;
      if (fire[2] && net.g_node[2].u_node.u_osc.u_emit.quiet != 0) n_quiet++;
      if (upd[0] && net.g_node[0].u_node.h_phase[PB]) n_carry++;
      if (upd[1] && net.g_node[1].u_node.h_phase[PB]) n_carry++;
      if (upd[2] && net.g_node[2].u_node.h_phase[PB]) n_carry++;
      if (net.g_node[0].u_node.u_agc.state == 2'd1 && net.g_node[0].u_node.u_agc.cnt == 16'(63)) n_agc++;
      if (net.g_node[2].u_node.u_osc.u_rate.corr != corr_prev) n_corr++;
      corr_prev = net.g_node[2].u_node.u_osc.u_rate.corr;
      if (now % 64 == 0) begin
        gam = 0;
        for (int i = 0; i < NN; i++)
          for (int j = i + 1; j < NN; j++)
            if (circ(phase[i], phase[j]) > gam) gam = circ(phase[i], phase[j]);
        if (now > (PERIODS * 3 / 4) * ONE) begin
          if (gam > gam_late_max) gam_late_max = gam;
          gam_sum += gam; gam_n++;
        end
      end
    end
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
    else $display("ok   %s", msg);
  endtask

  initial begin
    for (int k = 0; k < NN; k++) begin
      rst_at[k] = 10 + int'($urandom % ONE);
      ci_val[k] = longint'(k - 1) * 8590;   // -2, 0, +2 ppm of rate offset
      last_trig[k] = -(1 << 30);
    end
    wait (now == PERIODS * ONE);
    @(negedge clk);
    $display("tau seen %0d..%0d cycles, late Gamma max %0d mean %0d counts",
             tau_min_seen, tau_max_seen, gam_late_max, gam_sum / (gam_n > 0 ? gam_n : 1));
    chk(tau_min_seen >= 868 && tau_max_seen <= 888, "tau within [868, 888]");
    chk(gam_late_max <= 1776, "Gamma below 2 h(tau_max) in the last quarter");
    chk(n_tx > 0,     $sformatf("packets sent %0d", n_tx));
    chk(n_silent > 0, $sformatf("firings without packet %0d", n_silent));
    chk(n_quiet > 0,  $sformatf("firings in the quiet window %0d", n_quiet));
    chk(n_det > 0,    $sformatf("sync detections %0d", n_det));
    chk(n_refr > 0,   $sformatf("receptions in refractory %0d", n_refr));
    chk(n_upd > 0,    $sformatf("phase updates %0d", n_upd));
    chk(n_carry > 0,  $sformatf("updates through one %0d", n_carry));
    chk(n_agc > 0,    $sformatf("AGC decisions at node 0: %0d", n_agc));
    chk(n_corr > 0,   $sformatf("rate correction steps at node 2: %0d", n_corr));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
