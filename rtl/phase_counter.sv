// phase_counter: the free-running core of the oscillator.
//
// A PHASE_BITS-bit counter that increments by one every clock and wraps from
// 2^PHASE_BITS-1 to 0. At the paper's 22 bits and 40 MHz the wrap period,
// i.e. the oscillator cycle t_c, is 104.86 ms. The counter itself is never
// adjusted: phase jumps and rate corrections are added to its output by the
// oscillator. The counter width and clock follow the paper; the synchronous
// active-low reset to zero is this design's choice.
// Timing: count is registered; it holds 0 in the first cycle after reset.
module phase_counter #(
  parameter int unsigned PHASE_BITS = 22
) (
  input  logic                  clk,
  input  logic                  rst_n,
  output logic [PHASE_BITS-1:0] count
);
  always_ff @(posedge clk) begin
    if (!rst_n) count <= '0;
    else        count <= count + 1'b1;
  end
endmodule
