// correlator: finds the synchronization word in the baseband signal.
//
// An FIR filter whose 32 taps are the sync word bits mapped to +1/-1, spaced
// SPS samples apart (a tapped delay line of 31*SPS+1 samples), so its output
// is the correlation of the last 32 symbol-spaced samples with the word. A
// detection is reported when |output| has exceeded THRESH and starts to fall,
// i.e. one cycle after the correlation peak; the magnitude makes the
// detection independent of the carrier loop's 180-degree ambiguity. After a
// detection the block ignores further peaks for HOLDOFF cycles (one packet).
// The FIR correlator is the paper's; the tap spacing, threshold, peak
// picking and hold-off are this design's choices.
// Timing: a sync word whose last symbol sample enters at cycle k (with the
// best sampling phase) gives sync_detected in cycle k + 2.
module correlator
  import pco_pkg::*;
#(
  parameter logic [31:0] SYNC_WORD = 32'hB53C_E24D,
  parameter int unsigned THRESH    = 80000,
  parameter int unsigned HOLDOFF   = 768
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t in_i,
  output logic    sync_detected
);
  localparam int unsigned DEPTH = 31 * SPS + 1;

  sample_t             dly [DEPTH];
  logic signed [21:0]  acc;
  logic        [21:0]  mag, mag_q;
  logic        [15:0]  hold;

  always_comb begin
    acc = '0;
    for (int k = 0; k < 32; k++) begin
      // tap k multiplies the sample (31-k)*SPS cycles old; bit 31 is sent first
      if (SYNC_WORD[k]) acc = acc + 22'(dly[k * SPS]);
      else              acc = acc - 22'(dly[k * SPS]);
    end
    mag = (acc < 0) ? 22'(-acc) : 22'(acc);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) dly[i] <= '0;
      mag_q         <= '0;
      hold          <= '0;
      sync_detected <= 1'b0;
    end else begin
      dly[0] <= in_i;
      for (int i = 1; i < DEPTH; i++) dly[i] <= dly[i-1];
      mag_q         <= mag;
      sync_detected <= 1'b0;
      if (hold != 0) hold <= hold - 1'b1;
      else if (mag_q > 22'(THRESH) && mag < mag_q) begin
        sync_detected <= 1'b1;
        hold          <= 16'(HOLDOFF);
      end
    end
  end
endmodule
