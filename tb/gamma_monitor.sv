// gamma_monitor: testbench helper that measures the synchronization
// precision of a network of NN nodes, Gamma = max over node pairs of the
// circular phase distance min(|phi_i - phi_j|, 1 - |phi_i - phi_j|), in
// phase counts. Sampled every 64 cycles while all nodes are out of reset;
// from cycle t_late on it keeps the mean and the maximum. The measure
// Gamma is the one used for the published precision figures; the sampling
// interval is this testbench's choice.
module gamma_monitor #(
  parameter int          NN = 2,
  parameter int unsigned PB = 16
) (
  input  logic          clk,
  input  logic [PB-1:0] phase [NN],
  input  logic [NN-1:0] in_reset,
  input  longint        now,
  input  longint        t_late,
  output longint        gam_now,
  output longint        late_max,
  output longint        late_mean
);
  localparam longint ONE = longint'(1) << PB;
  longint sum = 0, n = 0;

  initial begin gam_now = 0; late_max = 0; late_mean = 0; end

  always @(negedge clk) begin
    if (in_reset == 0 && now % 64 == 0) begin
      longint g, d;
      g = 0;
      for (int i = 0; i < NN; i++)
        for (int j = i + 1; j < NN; j++) begin
          d = (phase[i] > phase[j]) ? longint'(phase[i] - phase[j]) : longint'(phase[j] - phase[i]);
          if (ONE - d < d) d = ONE - d;
          if (d > g) g = d;
        end
      gam_now = g;
      if (now >= t_late) begin
        if (g > late_max) late_max = g;
        sum += g; n++;
        late_mean = sum / n;
      end
    end
  end
endmodule
