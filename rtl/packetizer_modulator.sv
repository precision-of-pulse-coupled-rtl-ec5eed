// packetizer_modulator: builds the sync packet and BPSK-modulates it.
//
// A tx_trigger starts one packet of 12 bytes: 8 training bytes, which let
// the receiver set its gain and lock its carrier loop, followed by the
// 4-byte pseudorandom synchronization word. Bits go out MSB first, one every
// SPS = 8 clock cycles (5 Msymbol/s), as BPSK symbols +AMPL (bit 1) and
// -AMPL (bit 0). The whole packet lasts 96 * 8 cycles = 19.2 us at 40 MHz,
// the paper's transmit duration. The packet layout, length and rate are the
// paper's; the training byte 0x55, the sync word value, the bit order and the
// amplitude are this design's choices. A trigger during a packet is ignored.
// Interface: sym_valid pulses once per symbol with the symbol on sym; busy is
// high from the cycle after the trigger until the last symbol period ends and
// can drive the transmit/receive switch.
module packetizer_modulator
  import pco_pkg::*;
#(
  parameter logic [31:0] SYNC_WORD = 32'hB53C_E24D,
  parameter int unsigned AMPL      = 8191
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    tx_trigger,
  output logic    sym_valid,
  output sample_t sym,
  output logic    busy
);
  localparam logic [PKT_BITS-1:0] PACKET = {{PREAMBLE_BYTES{PREAMBLE_BYTE}}, SYNC_WORD};

  logic [$clog2(PKT_BITS)-1:0] bit_idx;
  logic [$clog2(SPS)-1:0]      phase_cnt;
  logic                        cur_bit;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      bit_idx   <= '0;
      phase_cnt <= '0;
    end else if (!busy) begin
      if (tx_trigger) begin
        busy      <= 1'b1;
        bit_idx   <= '0;
        phase_cnt <= '0;
      end
    end else begin
      phase_cnt <= phase_cnt + 1'b1;
      if (phase_cnt == $clog2(SPS)'(SPS - 1)) begin
        if (bit_idx == $clog2(PKT_BITS)'(PKT_BITS - 1)) busy <= 1'b0;
        else                         bit_idx <= bit_idx + 1'b1;
      end
    end
  end

  assign cur_bit   = PACKET[$clog2(PKT_BITS)'(PKT_BITS - 1) - bit_idx];
  assign sym_valid = busy && (phase_cnt == 0);
  assign sym       = !busy ? sample_t'(0) :
                     (cur_bit ? sample_t'(AMPL) : -sample_t'(AMPL));
endmodule
