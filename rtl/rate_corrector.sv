// rate_corrector: phase rate correction (memory and lower accumulator of the
// oscillator diagram).
//
// Each board's oscillator runs slightly fast or slow (the paper measured
// +1.8 to +6 ppm). The correction term c_i, in counts per clock cycle, is kept
// in a register (the board's "memory") and added to an accumulator on every
// clock. The integer part of the accumulator (its top PHASE_BITS bits) is
// added to the counter by the oscillator, so a negative c_i of -6e-6 slows
// the phase by 6 ppm. c_i is a signed fixed-point value with CORR_FRAC_BITS
// fraction bits (32 bits give 2.3e-4 ppm resolution); the format, the load
// port and the reset value 0 (no correction) are this design's choices.
// Timing: ci is loaded in the cycle after ci_we; the accumulator adds the
// stored ci every cycle; corr is the registered integer part.
module rate_corrector #(
  parameter int unsigned PHASE_BITS     = 22,
  parameter int unsigned CORR_FRAC_BITS = 32
) (
  input  logic                                   clk,
  input  logic                                   rst_n,
  input  logic                                   ci_we,
  input  logic [PHASE_BITS+CORR_FRAC_BITS-1:0]   ci_wdata,
  output logic [PHASE_BITS+CORR_FRAC_BITS-1:0]   ci,
  output logic [PHASE_BITS-1:0]                  corr
);
  localparam int unsigned W = PHASE_BITS + CORR_FRAC_BITS;
  logic [W-1:0] acc;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      ci  <= '0;
      acc <= '0;
    end else begin
      if (ci_we) ci <= ci_wdata;
      acc <= acc + ci;   // two's complement: a negative ci counts down
    end
  end

  assign corr = acc[W-1 -: PHASE_BITS];
endmodule
