// offset_accumulator: the "a - b" block and the enabled accumulator of the
// oscillator (upper row of the oscillator diagram).
//
// When the synchronization algorithm decides to adjust the phase it presents
// the new phase a = H(phi) (in counts) and raises enable. The block adds
// a - b to its accumulator, b being the oscillator's present phase, so that
// the oscillator's sum moves to exactly H(phi). Without enable the input is
// ignored, but the output always shows the accumulated offset. All arithmetic
// is modulo 2^PHASE_BITS, like the phase itself. The structure follows the
// paper; widths and reset to zero are this design's choice.
// Timing: offset changes in the cycle after enable.
module offset_accumulator #(
  parameter int unsigned PHASE_BITS = 22
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  enable,
  input  logic [PHASE_BITS-1:0] h_phase,  // a
  input  logic [PHASE_BITS-1:0] phase,    // b
  output logic [PHASE_BITS-1:0] offset
);
  logic [PHASE_BITS-1:0] diff;
  assign diff = h_phase - phase;

  always_ff @(posedge clk) begin
    if (!rst_n)      offset <= '0;
    else if (enable) offset <= offset + diff;
  end
endmodule
