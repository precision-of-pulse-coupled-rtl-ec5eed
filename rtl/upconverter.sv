// upconverter: moves the real baseband signal to a digital IF of fs/4.
//
// The baseband sample x is multiplied by exp(j*pi*n/2), n being the sample
// index, so the output cycles through (x, 0), (0, x), (-x, 0), (0, -x) as
// (I, Q). At the 40 MHz sample rate this places the signal at a 10 MHz IF
// with no multiplier. The paper shows an upconverter between the
// interpolator and the radio but gives neither its frequency nor its
// structure; the fs/4 IF is this design's choice, and the receiver's
// downconverter undoes it.
// Timing: one register stage (output in the cycle after the input).
module upconverter
  import pco_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t in_i,
  output sample_t out_i,
  output sample_t out_q
);
  logic [1:0] n;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n     <= '0;
      out_i <= '0;
      out_q <= '0;
    end else begin
      n <= n + 1'b1;
      unique case (n)
        2'd0: begin out_i <= in_i;  out_q <= '0;    end
        2'd1: begin out_i <= '0;    out_q <= in_i;  end
        2'd2: begin out_i <= -in_i; out_q <= '0;    end
        2'd3: begin out_i <= '0;    out_q <= -in_i; end
      endcase
    end
  end
endmodule
