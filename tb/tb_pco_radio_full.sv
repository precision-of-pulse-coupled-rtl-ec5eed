// tb_pco_radio_full: two nodes at the full default size (22-bit phase,
// period 2^22 cycles = 104.86 ms at 40 MHz, IES*), joined by a simple
// channel (99 cycles of delay, gain 0.06, a 5 kHz carrier offset, half
// duplex, no loss). Node B leaves reset 1,500,000 cycles after node A.
// The test runs until one complete pulse exchange has been seen:
//   * node A's period, between two firings with no update in between, is
//     exactly 2^22 cycles;
//   * a packet triggered by one node is detected by the other 877 cycles
//     later (tau_bar);
//   * when the receiver is outside its refractory interval it moves to the
//     IES* response H(phi), checked against a real-number reference, and
//     shows H + 1 one cycle later.
module tb_pco_radio_full;
  import pco_pkg::*;
  localparam real PI = 3.141592653589793;
  localparam longint ONE = longint'(1) << 22;
  localparam int D = 99;

  logic clk = 0;
  logic rst_a = 0, rst_b = 0;
  sample_t tx_i [2], tx_q [2], rx_i [2], rx_q [2];
  logic tr_tx [2], fire [2], trig [2], det [2], upd [2];
  logic [3:0] gain [2];
  logic [53:0] ci [2];
  logic [21:0] phase [2];
  int dl_i [2][D], dl_q [2][D];
  int ptr = 0;
  longint now = 0, last_fire_a = -1, last_trig [2];
  int checks = 0, failures = 0;
  int n_updates = 0, n_tau = 0, n_period = 0;
  bit upd_seen_a = 0;

  pco_radio node_a (.clk, .rst_n(rst_a), .rx_i(rx_i[0]), .rx_q(rx_q[0]), .tx_i(tx_i[0]), .tx_q(tx_q[0]),
    .tr_tx(tr_tx[0]), .rx_gain(gain[0]), .ci_we(1'b0), .ci_wdata('0), .ci(ci[0]), .phase(phase[0]),
    .fire(fire[0]), .tx_trigger(trig[0]), .sync_detected(det[0]), .phase_update(upd[0]));
  pco_radio node_b (.clk, .rst_n(rst_b), .rx_i(rx_i[1]), .rx_q(rx_q[1]), .tx_i(tx_i[1]), .tx_q(tx_q[1]),
    .tr_tx(tr_tx[1]), .rx_gain(gain[1]), .ci_we(1'b0), .ci_wdata('0), .ci(ci[1]), .phase(phase[1]),
    .fire(fire[1]), .tx_trigger(trig[1]), .sync_detected(det[1]), .phase_update(upd[1]));

  always #12.5 clk = ~clk;

  initial begin
    foreach (dl_i[a, b]) begin dl_i[a][b] = 0; dl_q[a][b] = 0; end
    foreach (rx_i[a]) begin rx_i[a] = 0; rx_q[a] = 0; end
    last_trig[0] = -(1 << 30); last_trig[1] = -(1 << 30);
  end

  // channel
  always @(posedge clk) begin
    now <= now + 1;
    for (int r = 0; r < 2; r++) begin
      int s;
      real th, vi, vq;
      s = 1 - r;
      th = 2.0 * PI * 5.0e3 * real'(now) / 40.0e6 * ((r == 0) ? 1.0 : -1.0);
      vi = 0.06 * (real'(dl_i[s][ptr]) * $cos(th) - real'(dl_q[s][ptr]) * $sin(th));
      vq = 0.06 * (real'(dl_i[s][ptr]) * $sin(th) + real'(dl_q[s][ptr]) * $cos(th));
      if (tr_tx[r]) begin vi = 0.0; vq = 0.0; end
      rx_i[r] <= sample_t'($rtoi(vi));
      rx_q[r] <= sample_t'($rtoi(vq));
    end
    for (int s = 0; s < 2; s++) begin dl_i[s][ptr] = int'(tx_i[s]); dl_q[s][ptr] = int'(tx_q[s]); end
    ptr = (ptr + 1) % D;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
    else $display("ok   %s", msg);
  endtask

  function automatic real ht(input real x);
    real a, b, hmax, hmin;
    hmax = 888.0 / 4194304.0; hmin = 868.0 / 4194304.0;
    a = (0.25 - 2.0 * hmax - hmin) / (0.5 - hmax);
    b = 0.5 + 2.0 * hmin - 2.0 * hmax;
    return (x <= 0.5) ? a * (x - hmax) + hmax : b * (x - 1.0) + 1.0;
  endfunction

  always @(negedge clk) begin
    for (int k = 0; k < 2; k++) if (trig[k]) last_trig[k] = now;
    if (upd[0]) upd_seen_a = 1;
    if (rst_a && fire[0]) begin
      if (last_fire_a >= 0 && !upd_seen_a) begin
        chk(now - last_fire_a == ONE, $sformatf("node A period %0d cycles", now - last_fire_a));
        n_period++;
      end
      last_fire_a = now;
      upd_seen_a = 0;
    end
    for (int k = 0; k < 2; k++) if (det[k]) begin
      chk(now - last_trig[1-k] == 877, $sformatf("node %0d detects %0d cycles after the trigger", k, now - last_trig[1-k]));
      n_tau++;
      if (upd[k]) begin
        real x, h;
        longint hc;
        logic [21:0] p0;
        p0 = phase[k];
        x = (real'(p0) - 877.0) / 4194304.0;
        if (x < 0) x += 1.0;
        h = ht(x) + 877.0 / 4194304.0;
        hc = longint'(h * 4194304.0);
        fork
          begin
            logic [21:0] pk;
            int kk;
            kk = k;
            @(negedge clk);
            pk = phase[kk];
            chk(longint'(pk) - ((hc + 1) % ONE) <= 2 && ((hc + 1) % ONE) - longint'(pk) <= 2,
                $sformatf("node %0d phase %0d -> %0d, reference H+1 = %0d", kk, p0, pk, (hc + 1) % ONE));
            n_updates++;
          end
        join_none
      end else begin
        $display("node %0d: reception at phase %0d is in the refractory interval", k, phase[k]);
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_a = 1;
    repeat (1_500_000) @(negedge clk);
    rst_b = 1;
    // until one update has been checked and node A's period has been seen
    while (!(n_updates >= 1 && n_period >= 1) && now < 12 * ONE) @(negedge clk);
    repeat (2) @(negedge clk);
    chk(n_updates >= 1, "a phase update happened");
    chk(n_period >= 1, "a full period was timed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (13 * ONE) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
