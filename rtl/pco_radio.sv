// pco_radio: one FPGA radio node that synchronizes its oscillator with its
// neighbours by pulse coupling.
//
// Every node runs a 22-bit phase counter at 40 MHz (cycle 104.86 ms). When
// the phase reaches one the node may send a "pulse": a 19.2 us BPSK packet
// of 8 training bytes and a 4-byte sync word. A node that detects a sync
// word from a neighbour lets its synchronization algorithm move its own
// phase to H(phi). The chain is
//   transmit: oscillator tx trigger -> packetizer/modulator -> interpolator
//             -> upconverter (fs/4 IF) -> tx_i/tx_q to the radio
//   receive:  rx_i/rx_q from the radio -> AGC -> downconverter + CFO loop
//             -> correlator -> sync detected -> sync algorithm
//   sync:     sync algorithm <-> oscillator (phi, update strobe, H(phi))
// The structure follows the paper's block diagram. The RF part (DAC/ADC,
// 2.4 GHz mixers, amplifiers, antenna switch) is outside: tx_i/tx_q and
// rx_i/rx_q are the IF sample streams, tr_tx selects transmit on the antenna
// switch and rx_gain carries the AGC's gain code. ci_we/ci_wdata load the
// board's phase rate correction term (used with IES*; 0 otherwise).
// ALGO selects the algorithm; the sending probability and the IES* quiet
// window follow from it (p = 1 for PS and SISA, 1/2 for IES and IES*).
// Timing: all outputs are registered or follow registers combinationally;
// one clock domain, synchronous active-low reset. The quadrature output of
// the carrier loop and the AGC's locked flag are left unused on purpose:
// the correlator works on the in-phase part only, and the gain code alone
// goes to the radio.
module pco_radio
  import pco_pkg::*;
#(
  parameter algo_e       ALGO           = ALGO_IES_STAR,
  parameter int unsigned PHASE_BITS     = PHASE_BITS_DEF,
  parameter int unsigned CORR_FRAC_BITS = CORR_FRAC_DEF,
  parameter int unsigned TAU_MIN_CYC    = TAU_MIN_CYC_DEF,
  parameter int unsigned TAU_MAX_CYC    = TAU_MAX_CYC_DEF,
  parameter int unsigned TAU_MEAN_CYC   = TAU_MEAN_CYC_DEF,
  parameter int unsigned NU_MAX_PPM     = NU_MAX_PPM_DEF,
  parameter logic [31:0] SYNC_WORD      = SYNC_WORD_DEF,
  parameter logic [31:0] LFSR_SEED      = 32'hACE1_2B5D
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // radio interface
  input  sample_t                              rx_i,
  input  sample_t                              rx_q,
  output sample_t                              tx_i,
  output sample_t                              tx_q,
  output logic                                 tr_tx,
  output logic [3:0]                           rx_gain,
  // phase rate correction term c_i
  input  logic                                 ci_we,
  input  logic [PHASE_BITS+CORR_FRAC_BITS-1:0] ci_wdata,
  output logic [PHASE_BITS+CORR_FRAC_BITS-1:0] ci,
  // observation
  output logic [PHASE_BITS-1:0]                phase,
  output logic                                 fire,
  output logic                                 tx_trigger,
  output logic                                 sync_detected,
  output logic                                 phase_update
);
  localparam int unsigned P_LOG2 = (ALGO == ALGO_IES || ALGO == ALGO_IES_STAR) ? 1 : 0;
  localparam int unsigned QUIET  = (ALGO == ALGO_IES_STAR) ? (TAU_MEAN_CYC - TAU_MIN_CYC) : 0;

  logic                h_upd;
  logic [PHASE_BITS:0] h_phase;
  logic                sym_valid;
  sample_t             sym, tx_bb;
  sample_t             agc_i, agc_q, bb_i, bb_q;
  logic                agc_locked;

  // synchronization
  sync_algorithm #(.ALGO(ALGO), .PHASE_BITS(PHASE_BITS), .TAU_MIN_CYC(TAU_MIN_CYC),
                   .TAU_MAX_CYC(TAU_MAX_CYC), .TAU_MEAN_CYC(TAU_MEAN_CYC),
                   .NU_MAX_PPM(NU_MAX_PPM)) u_alg (
    .phase, .fire, .rx_sync(sync_detected), .upd(h_upd), .h_phase);

  oscillator #(.PHASE_BITS(PHASE_BITS), .CORR_FRAC_BITS(CORR_FRAC_BITS), .P_NUM(1),
               .P_LOG2(P_LOG2), .QUIET_CYCLES(QUIET), .LFSR_SEED(LFSR_SEED)) u_osc (
    .clk, .rst_n, .upd(h_upd), .h_phase, .rx_sync(sync_detected), .ci_we, .ci_wdata,
    .ci, .phase, .fire, .tx_trigger);

  assign phase_update = h_upd;

  // transmitter
  packetizer_modulator #(.SYNC_WORD(SYNC_WORD)) u_pkt (
    .clk, .rst_n, .tx_trigger, .sym_valid, .sym, .busy(tr_tx));

  interpolator u_interp (
    .clk, .rst_n, .in_valid(sym_valid), .in_sym(sym), .out(tx_bb));

  upconverter u_up (
    .clk, .rst_n, .in_i(tx_bb), .out_i(tx_i), .out_q(tx_q));

  // receiver
  agc u_agc (
    .clk, .rst_n, .in_i(rx_i), .in_q(rx_q), .out_i(agc_i), .out_q(agc_q),
    .gain(rx_gain), .locked(agc_locked));

  downconverter_cfo u_ddc (
    .clk, .rst_n, .in_i(agc_i), .in_q(agc_q), .out_i(bb_i), .out_q(bb_q));

  correlator #(.SYNC_WORD(SYNC_WORD)) u_corr (
    .clk, .rst_n, .in_i(bb_i), .sync_detected);
endmodule
