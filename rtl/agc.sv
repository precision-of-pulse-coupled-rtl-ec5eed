// agc: automatic gain control at the start of each received packet.
//
// The paper uses the I and Q components to estimate and set the receive
// gains during the 8 training bytes. Here the level is |I| + |Q|. While idle
// the gain is 0 (x1). When the level exceeds ENERGY_TH a packet is assumed
// to start: for MEAS_SAMPLES samples the peak level is tracked, then the
// largest power-of-two gain 2^g (g = 0..7) with peak * 2^g < 2 * TARGET is
// chosen and held for HOLD_SAMPLES samples (one packet, 12 bytes = 768
// samples), after which the block returns to idle. The gain is applied to
// I and Q with saturation and also put out as a code for the radio's
// amplifiers. The measurement window, thresholds, power-of-two steps and
// digital application are this design's choices.
// Timing: out_i/out_q are registered (one cycle); gain changes the cycle
// after the measurement window closes; locked is high while it is held.
module agc
  import pco_pkg::*;
#(
  parameter int unsigned MEAS_SAMPLES = 64,
  parameter int unsigned HOLD_SAMPLES = 768,
  parameter int unsigned ENERGY_TH    = 256,
  parameter int unsigned TARGET       = 4096
) (
  input  logic       clk,
  input  logic       rst_n,
  input  sample_t    in_i,
  input  sample_t    in_q,
  output sample_t    out_i,
  output sample_t    out_q,
  output logic [3:0] gain,
  output logic       locked
);
  typedef enum logic [1:0] {AGC_IDLE, AGC_MEAS, AGC_HOLD} agc_state_e;
  agc_state_e state;

  logic [16:0] mag, peak;
  logic [15:0] cnt;
  logic [2:0]  g_new;

  function automatic logic [16:0] absval(input sample_t v);
    return (v < 0) ? 17'(-18'(v)) : 17'(v);
  endfunction

  function automatic sample_t scale(input sample_t v, input logic [3:0] g);
    logic signed [23:0] w;
    w = 24'(v) <<< g;
    if (w > 24'sd32767)       return sample_t'(16'sh7fff);
    else if (w < -24'sd32768) return sample_t'(16'sh8000);
    else                      return sample_t'(w);
  endfunction

  assign mag = absval(in_i) + absval(in_q);

  always_comb begin
    g_new = '0;
    for (int k = 0; k < 8; k++)
      if ((25'(peak) << k) < 25'(2 * TARGET)) g_new = 3'(k);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= AGC_IDLE;
      peak  <= '0;
      cnt   <= '0;
      gain  <= '0;
      out_i <= '0;
      out_q <= '0;
    end else begin
      out_i <= scale(in_i, gain);
      out_q <= scale(in_q, gain);
      unique case (state)
        AGC_IDLE: begin
          gain <= '0;
          if (mag > 17'(ENERGY_TH)) begin
            state <= AGC_MEAS;
            peak  <= mag;
            cnt   <= 16'd1;
          end
        end
        AGC_MEAS: begin
          if (mag > peak) peak <= mag;
          cnt <= cnt + 1'b1;
          if (cnt == 16'(MEAS_SAMPLES - 1)) begin
            state <= AGC_HOLD;
            gain  <= {1'b0, g_new};
            cnt   <= '0;
          end
        end
        AGC_HOLD: begin
          cnt <= cnt + 1'b1;
          if (cnt == 16'(HOLD_SAMPLES - 1)) state <= AGC_IDLE;
        end
        default: state <= AGC_IDLE;
      endcase
    end
  end

  assign locked = (state == AGC_HOLD);
endmodule
