// sync_algorithm: refractory check and phase response function H(phi).
//
// When the correlator reports a received sync word (rx_sync) the algorithm
// looks at the present phase phi. Inside the refractory interval
// [0, phi_ref] nothing happens; outside it the block raises upd and presents
// the new phase H(phi), which the oscillator takes over in the same cycle.
// Four response functions are built in, chosen by ALGO (default IES*):
//   PS    H = min(1, e*phi + 1)                       phi_ref = 2(1+nu)h(tau_max)
//   SISA  H = (1 + 0.5) phi mod 1                     phi_ref = H(1) + 2(1+nu)h(tau_max)
//         and at phi = 1 the phase is set to H(1) = 0.5 (self-adjustment)
//   IES   H = Ht(phi - h(tau_min) mod 1) + h(tau_min)  phi_ref = (1+nu)h(tau_max)
//   IES*  H = Ht(phi - h(tau_bar) mod 1) + h(tau_bar)  phi_ref = (1+nu)h(tau_max)
// with the piecewise-linear Ht(x) = a(x - h(tau_max)) + h(tau_max) for
// x <= 1/2 and Ht(x) = b(x - 1) + 1 above, a = (1/4 - 2h(tau_max) - h(tau_min))
// / (1/2 - h(tau_max)), b = 1/2 + 2h(tau_min) - 2h(tau_max). The functions,
// constants and refractory intervals are the paper's. All phases are counts
// (h(tau) is tau in clock cycles); the constants a, b, e and 1+alpha are
// unsigned fixed point with 24 fraction bits, computed at elaboration.
// Rounding of refractory bounds up to whole counts, the use of h1 below
// phi_ref, and passing H >= 1 on with its integer bit (so that the oscillator
// fires) are this design's choices.
// Timing: purely combinational; h_phase is valid whenever upd is high.
module sync_algorithm
  import pco_pkg::*;
#(
  parameter algo_e       ALGO         = ALGO_IES_STAR,
  parameter int unsigned PHASE_BITS   = 22,
  parameter int unsigned TAU_MIN_CYC  = 868,
  parameter int unsigned TAU_MAX_CYC  = 888,
  parameter int unsigned TAU_MEAN_CYC = 877,
  parameter int unsigned NU_MAX_PPM   = 6
) (
  input  logic [PHASE_BITS-1:0] phase,
  input  logic                  fire,
  input  logic                  rx_sync,
  output logic                  upd,
  output logic [PHASE_BITS:0]   h_phase
);
  localparam int unsigned PB = PHASE_BITS;
  localparam longint ONE  = longint'(1) << PB;       // phase 1.0 in counts
  localparam longint QONE = longint'(1) << 24;       // 1.0 in the 24-bit constant format
  localparam longint TMIN = longint'(TAU_MIN_CYC);
  localparam longint TMAX = longint'(TAU_MAX_CYC);
  // (1+nu) h(tau_max) and 2 (1+nu) h(tau_max), rounded up to whole counts
  localparam longint REF1 = TMAX + (TMAX * NU_MAX_PPM + 999_999) / 1_000_000;
  localparam longint REF2 = 2 * TMAX + (2 * TMAX * NU_MAX_PPM + 999_999) / 1_000_000;
  localparam longint PHI_REF = (ALGO == ALGO_PS)   ? REF2 :
                               (ALGO == ALGO_SISA) ? (ONE / 2 + REF2) : REF1;
  // IES offsets: tau_min for IES, tau_bar for IES*
  localparam longint TOFF = (ALGO == ALGO_IES_STAR) ? longint'(TAU_MEAN_CYC) : TMIN;
  // constants, 24 fraction bits
  localparam longint E_Q     = 45_605_201;                                  // e
  localparam longint ALPHA_Q = QONE + QONE / 2;                             // 1 + alpha
  localparam longint A_Q = ((ONE / 4 - 2 * TMAX - TMIN) * QONE) / (ONE / 2 - TMAX);
  localparam longint B_Q = QONE / 2 - (2 * (TMAX - TMIN) * QONE) / ONE;

  longint phi, x, ht, h;

  always_comb begin
    phi = longint'(phase);
    h   = 0;
    unique case (ALGO)
      ALGO_PS: begin
        h = ((E_Q * phi) >>> 24) + ONE;          // a1 = e, a0 = 1
        if (h > ONE) h = ONE;
      end
      ALGO_SISA: begin
        if (fire) h = ONE / 2 + phi;             // H(1) = 1.5 mod 1, plus time since one
        else      h = ((ALPHA_Q * phi) >>> 24) % ONE;
      end
      default: begin                             // IES and IES*
        x = (phi - TOFF + ONE) % ONE;
        if (x <= ONE / 2) ht = ((A_Q * (x - TMAX)) >>> 24) + TMAX;
        else              ht = ONE - ((B_Q * (ONE - x)) >>> 24);
        h = ht + TOFF;                           // may be >= 1: carried to the oscillator
      end
    endcase
    h_phase = h[PB:0];
  end

  assign upd = ((ALGO == ALGO_SISA) && fire) ||
               (rx_sync && (longint'(phase) > PHI_REF));
endmodule
