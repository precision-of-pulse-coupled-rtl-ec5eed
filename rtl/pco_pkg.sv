// pco_pkg: shared types and constants of the pulse-coupled oscillator radio.
//
// The phase of the oscillator is an unsigned count of PHASE_BITS bits: the
// fraction phi in [0,1) is count * 2^-PHASE_BITS. With the 40 MHz clock and
// 22 bits one oscillator cycle lasts 2^22 / 40e6 = 104.86 ms. Propagation and
// processing delays are expressed in clock cycles (one cycle = 25 ns).
// Baseband samples are signed 16-bit values; the transmitter sends one BPSK
// symbol every SPS = 8 clock cycles (5 Msymbol/s, 96 symbols in 19.2 us).
// The algorithm selection, the delay numbers and the 12-byte packet layout
// follow the paper's measurements; sample widths, amplitudes, the sync word
// bytes and the preamble byte are this design's own choices.
package pco_pkg;

  // Synchronization algorithms. IES_STAR (IES with phase rate correction) is
  // the proposed variant and the default of the design.
  typedef enum logic [1:0] {
    ALGO_PS       = 2'd0,   // Pagliari & Scaglione
    ALGO_SISA     = 2'd1,   // inhibitory coupling with self-adjustment
    ALGO_IES      = 2'd2,   // inhibitory/excitatory coupling, stochastic emission
    ALGO_IES_STAR = 2'd3    // IES with phase rate correction
  } algo_e;

  localparam int unsigned PHASE_BITS_DEF = 22;   // 22-bit wrap-around counter
  localparam int unsigned CORR_FRAC_DEF  = 32;   // fraction bits of c_i

  // Measured delays (21.7 / 22.2 / 21.92 us) in 40 MHz cycles.
  localparam int unsigned TAU_MIN_CYC_DEF  = 868;
  localparam int unsigned TAU_MAX_CYC_DEF  = 888;
  localparam int unsigned TAU_MEAN_CYC_DEF = 877;
  localparam int unsigned NU_MAX_PPM_DEF   = 6;  // largest phase rate deviation

  // Physical layer.
  localparam int unsigned SPS            = 8;    // 40 MHz / 5 Msymbol/s
  localparam int unsigned PREAMBLE_BYTES = 8;    // AGC and CFO training
  localparam int unsigned SYNC_BYTES     = 4;    // synchronization word
  localparam int unsigned PKT_BITS       = 8 * (PREAMBLE_BYTES + SYNC_BYTES);  // 96
  localparam logic [7:0]  PREAMBLE_BYTE  = 8'h55;
  localparam logic [31:0] SYNC_WORD_DEF  = 32'hB53C_E24D;

  typedef logic signed [15:0] sample_t;

endpackage
