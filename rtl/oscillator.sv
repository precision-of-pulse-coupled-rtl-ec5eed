// oscillator: the board's pulse-coupled oscillator (phase generator).
//
// The phase phi is the sum, modulo 2^PHASE_BITS, of three registers:
//   * the free-running counter (phase_counter, +1 per 40 MHz cycle),
//   * the offset accumulator, which on an update adds H(phi) - phi so that
//     the sum jumps to the new phase H(phi) chosen by the algorithm,
//   * the integer part of the rate correction accumulator (c_i per cycle).
// The fraction phi is phase * 2^-PHASE_BITS; the scaling blocks of the
// paper's diagram are only this change of interpretation and cost no logic.
//
// "Reaching one" is the carry of the phase past 2^PHASE_BITS. It is found by
// remembering the base of the next step (the present phase, or H after an
// update) and checking whether the new phase is smaller, i.e. wrapped. An
// update with H >= 1 (H has one integer bit) also counts as reaching one:
// the phase was pushed through one, as with PS, whose H is always 1. The
// pulse emitter then decides whether to send a pulse (tx_trigger).
// Structure and widths follow the paper; the carry-based "==1" test and the
// integer bit of H are this design's reading of the diagram.
// Timing: an update presented with upd in cycle k shows as phase = H + 1
// in cycle k+1; fire and tx_trigger are high for the one cycle in which
// phase holds its wrapped value.
module oscillator #(
  parameter int unsigned PHASE_BITS     = 22,
  parameter int unsigned CORR_FRAC_BITS = 32,
  parameter int unsigned P_NUM          = 1,
  parameter int unsigned P_LOG2         = 1,
  parameter int unsigned QUIET_CYCLES   = 9,
  parameter logic [31:0] LFSR_SEED      = 32'hACE1_2B5D
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  input  logic                                 upd,        // "sync. detected" from the algorithm
  input  logic [PHASE_BITS:0]                  h_phase,    // H(phi), 1.PHASE_BITS fixed point
  input  logic                                 rx_sync,    // raw sync word detection
  input  logic                                 ci_we,
  input  logic [PHASE_BITS+CORR_FRAC_BITS-1:0] ci_wdata,
  output logic [PHASE_BITS+CORR_FRAC_BITS-1:0] ci,         // stored c_i (read back)
  output logic [PHASE_BITS-1:0]                phase,
  output logic                                 fire,
  output logic                                 tx_trigger
);
  logic [PHASE_BITS-1:0] count, offset, corr;
  logic [PHASE_BITS-1:0] base_q;
  logic                  carry_q;

  phase_counter #(.PHASE_BITS(PHASE_BITS)) u_counter (
    .clk, .rst_n, .count);

  offset_accumulator #(.PHASE_BITS(PHASE_BITS)) u_offset (
    .clk, .rst_n, .enable(upd), .h_phase(h_phase[PHASE_BITS-1:0]), .phase, .offset);

  rate_corrector #(.PHASE_BITS(PHASE_BITS), .CORR_FRAC_BITS(CORR_FRAC_BITS)) u_rate (
    .clk, .rst_n, .ci_we, .ci_wdata, .ci, .corr);

  // "Add"
  assign phase = count + offset + corr;

  // "==1": the phase passed through one since the last cycle.
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      base_q  <= '0;
      carry_q <= 1'b0;
    end else begin
      base_q  <= upd ? h_phase[PHASE_BITS-1:0] : phase;
      carry_q <= upd && h_phase[PHASE_BITS];
    end
  end
  assign fire = carry_q || (phase < base_q);

  pulse_emitter #(.P_NUM(P_NUM), .P_LOG2(P_LOG2), .QUIET_CYCLES(QUIET_CYCLES),
                  .LFSR_SEED(LFSR_SEED)) u_emit (
    .clk, .rst_n, .reached_one(fire), .sync_detected(rx_sync), .tx_trigger);
endmodule
