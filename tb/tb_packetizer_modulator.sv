// tb_packetizer_modulator: one trigger must produce exactly the 96 BPSK
// symbols of the packet: eight 0x55 training bytes and the sync word
// 0xB53CE24D, MSB first, 1 -> +8191 and 0 -> -8191, one symbol strobe every
// 8 cycles, and busy for 768 cycles (19.2 us at 40 MHz, the paper's packet
// duration). A trigger during the packet must be ignored; a second packet
// after the first one must be identical.
module tb_packetizer_modulator;
  import pco_pkg::*;
  logic clk = 0, rst_n = 0, trig = 0;
  logic sym_valid, busy;
  sample_t sym;
  int checks = 0, failures = 0;
  logic [95:0] expected;

  packetizer_modulator dut (.clk, .rst_n, .tx_trigger(trig), .sym_valid, .sym, .busy);

  always #12.5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  task automatic one_packet(input bit extra_trigger);
    int nsym, busy_cycles, last_valid;
    @(negedge clk); trig = 1; @(negedge clk); trig = 0;
    nsym = 0; busy_cycles = 0; last_valid = -1;
    for (int c = 0; c < 900; c++) begin
      if (extra_trigger && c == 300) trig = 1;
      if (extra_trigger && c == 301) trig = 0;
      if (busy) busy_cycles++;
      if (sym_valid) begin
        if (last_valid >= 0) chk(c - last_valid == 8, "symbol spacing");
        last_valid = c;
        chk(sym == (expected[95 - nsym] ? 16'sd8191 : -16'sd8191),
            $sformatf("symbol %0d = %0d", nsym, sym));
        nsym++;
      end else if (busy) begin
        chk(sym == (expected[96 - nsym] ? 16'sd8191 : -16'sd8191), "symbol held");
      end
      @(negedge clk);
    end
    chk(nsym == 96, $sformatf("symbols = %0d", nsym));
    chk(busy_cycles == 768, $sformatf("busy cycles = %0d", busy_cycles));
    chk(sym == 0, "idle output is zero");
  endtask

  initial begin
    expected = {64'h5555_5555_5555_5555, 32'hB53C_E24D};
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (5) @(posedge clk);
    chk(!busy && !sym_valid, "idle after reset");
    one_packet(1'b1);
    one_packet(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
