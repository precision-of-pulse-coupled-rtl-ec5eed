// pulse_emitter: the "==1" and "prob. p" blocks of the oscillator.
//
// Every time the oscillator's phase reaches one (reached_one, one cycle wide)
// this block decides whether the board transmits a pulse, i.e. a short sync
// packet. A 32-bit Galois LFSR advances every cycle; the pulse is sent when
// its low 16 bits are below P_NUM * 2^(16-P_LOG2), which gives a sending
// probability p = P_NUM / 2^P_LOG2 (p = 1 for PS and SISA, p = 1/2 for IES and
// IES*, as in the paper). For IES* a second rule applies: no pulse is sent if
// a sync word was received within the last QUIET_CYCLES cycles (the paper's
// tau_bar - tau_min = 0.22 us, 9 cycles at 40 MHz). QUIET_CYCLES = 0 disables
// the rule. The LFSR and its seed are this design's choice; the paper does
// not say how the random decision is drawn.
// Timing: tx_trigger is combinational from reached_one (same cycle).
module pulse_emitter #(
  parameter int unsigned P_NUM        = 1,
  parameter int unsigned P_LOG2       = 1,
  parameter int unsigned QUIET_CYCLES = 9,
  parameter logic [31:0] LFSR_SEED    = 32'hACE1_2B5D
) (
  input  logic clk,
  input  logic rst_n,
  input  logic reached_one,
  input  logic sync_detected,
  output logic tx_trigger
);
  localparam logic [16:0] P_THRESH = 17'(P_NUM << (16 - P_LOG2));
  localparam int unsigned QW = (QUIET_CYCLES < 2) ? 1 : $clog2(QUIET_CYCLES + 1);

  logic [31:0]   lfsr;
  logic [QW-1:0] quiet;
  logic          lucky, quiet_ok;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      lfsr  <= (LFSR_SEED == '0) ? 32'h1 : LFSR_SEED;
      quiet <= '0;
    end else begin
      // x^32 + x^22 + x^2 + x + 1, Galois form
      lfsr <= {1'b0, lfsr[31:1]} ^ (lfsr[0] ? 32'h8020_0003 : 32'h0);
      if (sync_detected)   quiet <= QW'(QUIET_CYCLES);
      else if (quiet != 0) quiet <= quiet - 1'b1;
    end
  end

  assign lucky      = {1'b0, lfsr[15:0]} < P_THRESH;
  assign quiet_ok   = (QUIET_CYCLES == 0) || ((quiet == 0) && !sync_detected);
  assign tx_trigger = reached_one && lucky && quiet_ok;
endmodule
