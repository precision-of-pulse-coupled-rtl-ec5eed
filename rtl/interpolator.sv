// interpolator: raises the 5 Msymbol/s BPSK stream to the 40 MHz sample rate.
//
// Between two consecutive symbols s0 and s1 the output walks linearly,
// s0 + (s1 - s0) * m / SPS for m = 0..SPS-1, which is zero insertion followed
// by a triangular FIR filter of length 2*SPS-1. When no new symbol arrives
// within SPS cycles the input is taken as 0, so the output returns to zero
// after a packet. The paper names the interpolator but not its filter; the
// linear interpolation is this design's choice. SPS must be a power of two.
// Timing: a symbol presented with in_valid in cycle k is reached exactly
// (m = 0 of the following segment) at the output in cycle k + SPS + 1; the
// output is registered.
module interpolator
  import pco_pkg::*;
#(
  parameter int unsigned SPS_P = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t in_sym,
  output sample_t out
);
  localparam int unsigned MW = $clog2(SPS_P);

  sample_t        prev, cur;
  logic [MW-1:0]  m;
  logic signed [16+MW+1:0] step;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      prev <= '0;
      cur  <= '0;
      m    <= '0;
      out  <= '0;
    end else begin
      if (in_valid || m == MW'(SPS_P - 1)) begin
        prev <= cur;
        cur  <= in_valid ? in_sym : sample_t'(0);
        m    <= '0;
      end else begin
        m <= m + 1'b1;
      end
      out <= sample_t'((18+MW)'(prev) + (step >>> MW));
    end
  end

  assign step = ((18+MW)'(cur) - (18+MW)'(prev)) * (18+MW)'($signed({1'b0, m}));
endmodule
