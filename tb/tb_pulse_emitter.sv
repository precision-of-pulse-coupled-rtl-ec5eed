// tb_pulse_emitter: the probabilistic pulse decision and the IES* quiet
// window. With p = 1/2 about half of 4000 firing events must trigger a
// packet (1800..2200 accepted). A firing event within 9 cycles of a
// received sync word must never trigger, one 10 or more cycles later must
// behave normally. A second instance with p = 1 and no quiet window must
// trigger on every event and never without one.
module tb_pulse_emitter;
  logic clk = 0, rst_n = 0, reached_one = 0, sync_det = 0;
  logic tx_half, tx_one;
  int checks = 0, failures = 0;
  int hits, events, blocked, ones, late_hits = 0;

  pulse_emitter dut (.clk, .rst_n, .reached_one, .sync_detected(sync_det), .tx_trigger(tx_half));
  pulse_emitter #(.P_NUM(1), .P_LOG2(0), .QUIET_CYCLES(0)) dut1 (
    .clk, .rst_n, .reached_one, .sync_detected(sync_det), .tx_trigger(tx_one));

  always #12.5 clk = ~clk;

  initial begin
    repeat (500000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    repeat (20) @(posedge clk);
    hits = 0; ones = 0;
    for (int i = 0; i < 4000; i++) begin
      repeat (1 + $urandom % 7) @(posedge clk);
      reached_one <= 1;
      @(negedge clk);
      if (tx_half) hits++;
      if (tx_one) ones++;
      @(posedge clk);
      reached_one <= 0;
      @(negedge clk);
      checks++; if (tx_half || tx_one) failures++;   // nothing without an event
    end
    checks++;
    if (hits < 1800 || hits > 2200) begin failures++; $display("p=1/2 gave %0d of 4000", hits); end
    checks++; if (ones != 4000) begin failures++; $display("p=1 gave %0d", ones); end
    // quiet window
    blocked = 0; events = 0;
    for (int d = 0; d <= 12; d++) begin
      for (int r = 0; r < 60; r++) begin
        @(posedge clk); sync_det <= 1;
        @(posedge clk); sync_det <= 0;
        if (d > 0) repeat (d - 1) @(posedge clk);
        else begin sync_det <= 1; end          // same cycle as the reception
        reached_one <= 1;
        @(negedge clk);
        if (d <= 9) begin checks++; if (tx_half) begin failures++; $display("quiet window broken at d=%0d", d); end end
        else if (tx_half) late_hits++;
        if (d > 9) events++;
        @(posedge clk); reached_one <= 0; sync_det <= 0;
        repeat (15) @(posedge clk);
      end
    end
    // d = 10..12: 180 events at p = 1/2
    checks++;
    if (late_hits < 60 || late_hits > 120) begin failures++; $display("after window %0d of %0d", late_hits, events); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
