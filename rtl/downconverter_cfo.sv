// downconverter_cfo: brings the fs/4 IF back to baseband and removes the
// carrier frequency offset (CFO) with a non-data-aided BPSK Costas loop.
//
// First the IF is removed by multiplying with exp(-j*pi*n/2) (a sign and
// swap pattern, no multiplier). What remains is the BPSK signal rotated by
// an unknown, slowly turning carrier phase. A numerically controlled
// oscillator (NCO) holds the loop's phase estimate theta (32 bits, 2^32 =
// one turn) and a CORDIC derotates the sample by -theta. For BPSK the
// quadrature part of a correctly derotated sample is zero whatever the data,
// so e = sign(I) * Q is a phase error that needs no knowledge of the bits
// (non-data-aided). A proportional-integral loop filter turns e into the NCO
// increment: freq += e << KI_SHIFT; theta += freq + (e << KP_SHIFT).
// The loop settles within the 8 training bytes for offsets of tens of kHz;
// like every squaring-type loop it leaves a 180-degree ambiguity, which the
// correlator tolerates by thresholding the magnitude of its output.
// The paper states only that a non-data-aided CFO algorithm from Barry, Lee
// and Messerschmitt is used; the choice of the Costas loop, its gains and
// the 14-stage combinational CORDIC (gain 1.647, halved at the output, so the
// overall gain is 0.82) are this design's.
// Timing: out_i/out_q are registered, one cycle after the input.
module downconverter_cfo
  import pco_pkg::*;
#(
  parameter int unsigned KP_SHIFT = 11,
  parameter int unsigned KI_SHIFT = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  sample_t in_i,
  input  sample_t in_q,
  output sample_t out_i,
  output sample_t out_q
);
  localparam int unsigned NIT = 14;
  // atan(2^-i) in units of 2^-16 turn
  localparam logic [15:0] ATAN [NIT] = '{16'd8192, 16'd4836, 16'd2555, 16'd1297,
                                         16'd651,  16'd326,  16'd163,  16'd81,
                                         16'd41,   16'd20,   16'd10,   16'd5,
                                         16'd3,    16'd1};

  logic [1:0]          n;
  sample_t             bi, bq;         // after the fs/4 downconversion
  logic [31:0]         theta;
  logic signed [31:0]  freq;
  logic signed [19:0]  ri, rq;         // CORDIC result
  logic signed [15:0]  err;

  // exp(-j*pi*n/2)
  always_comb begin
    unique case (n)
      2'd0: begin bi = in_i;  bq = in_q;  end
      2'd1: begin bi = in_q;  bq = -in_i; end
      2'd2: begin bi = -in_i; bq = -in_q; end
      default: begin bi = -in_q; bq = in_i; end
    endcase
  end

  // Rotate (bi, bq) by -theta: coarse quarter turns, then CORDIC on the rest.
  always_comb begin
    logic [15:0]        ang;
    logic [1:0]         quad;
    logic signed [15:0] res;
    logic signed [19:0] x, y, xn;
    ang  = -theta[31:16];
    quad = ang[15:14] + 2'(ang[13]);        // nearest quarter turn
    res  = $signed(ang - {quad, 14'd0});    // within +/- 1/8 turn
    unique case (quad)
      2'd0: begin x = 20'(bi);  y = 20'(bq);  end
      2'd1: begin x = -20'(bq); y = 20'(bi);  end
      2'd2: begin x = -20'(bi); y = -20'(bq); end
      default: begin x = 20'(bq); y = -20'(bi); end
    endcase
    for (int i = 0; i < NIT; i++) begin
      if (res >= 0) begin
        xn  = x - (y >>> i);
        y   = y + (x >>> i);
        res = res - $signed(ATAN[i]);
      end else begin
        xn  = x + (y >>> i);
        y   = y - (x >>> i);
        res = res + $signed(ATAN[i]);
      end
      x = xn;
    end
    ri = x;
    rq = y;
  end

  function automatic sample_t sat_half(input logic signed [19:0] v);
    logic signed [19:0] h;
    h = v >>> 1;
    if (h > 20'sd32767)       return sample_t'(16'sh7fff);
    else if (h < -20'sd32768) return sample_t'(16'sh8000);
    else                      return sample_t'(h);
  endfunction

  // phase error, non-data-aided: sign(I) * Q
  always_comb begin
    sample_t q;
    q   = sat_half(rq);
    err = (ri < 0) ? -q : q;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n     <= '0;
      theta <= '0;
      freq  <= '0;
      out_i <= '0;
      out_q <= '0;
    end else begin
      n     <= n + 1'b1;
      freq  <= freq + (32'(err) <<< KI_SHIFT);
      theta <= theta + 32'(freq) + 32'(32'(err) <<< KP_SHIFT);
      out_i <= sat_half(ri);
      out_q <= sat_half(rq);
    end
  end
endmodule
