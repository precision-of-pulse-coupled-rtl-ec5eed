// tb_oscillator: the assembled oscillator at full size (22-bit phase).
//   1. free running: phase advances by one per cycle; fire is high exactly
//      once per 2^22 cycles, in the cycle the phase shows 0;
//   2. an update to H (random, below one) gives phase H + 1 next cycle;
//   3. an update with H >= 1 fires in the next cycle with phase H - 1 + 1;
//   4. a rate correction of +1/4 count per cycle adds 1250 counts in 5000
//      cycles; -6 ppm (the paper's largest deviation) lengthens the period;
//   5. tx_trigger only ever comes together with fire.
module tb_oscillator;
  localparam int unsigned PB = 22, FB = 32;
  localparam longint ONE = longint'(1) << PB;
  logic clk = 0, rst_n = 0, upd = 0, rx_sync = 0, ci_we = 0;
  logic [PB:0] h_phase = '0;
  logic [PB+FB-1:0] ci_wdata = '0, ci;
  logic [PB-1:0] phase;
  logic fire, tx_trigger;
  int checks = 0, failures = 0;
  longint fires, trig, k, last_fire, period;

  oscillator dut (.clk, .rst_n, .upd, .h_phase, .rx_sync, .ci_we, .ci_wdata, .ci,
                  .phase, .fire, .tx_trigger);

  always #12.5 clk = ~clk;

  initial begin
    repeat (40_000_000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tx_trigger never without fire
  always @(negedge clk) if (rst_n && tx_trigger && !fire) begin
    failures++; $display("tx_trigger without fire");
  end

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    // 1. free running over three periods
    fires = 0; trig = 0; last_fire = -1;
    for (k = 1; k <= 3 * ONE + 10; k++) begin
      @(posedge clk); #1;
      if (k % 4099 == 0) chk(phase == PB'(k), $sformatf("free run k=%0d phase=%0d", k, phase));
      if (fire) begin
        chk(phase == 0, "fire at phase 0");
        if (last_fire >= 0) chk(k - last_fire == ONE, $sformatf("period %0d", k - last_fire));
        last_fire = k;
        fires++;
        if (tx_trigger) trig++;
      end
    end
    chk(fires == 3, $sformatf("fires in three periods = %0d", fires));
    // 2. updates below one
    for (int i = 0; i < 200; i++) begin
      logic [PB-1:0] h;
      h = PB'($urandom) | 22'h1;
      if (h == '1) h = 22'h1;
      @(negedge clk);
      h_phase = {1'b0, h};
      upd = 1;
      @(posedge clk); #1;
      upd = 0;
      chk(phase == PB'(h + 1), $sformatf("update to %0d gave %0d", h, phase));
      chk(!fire, "no fire after update below one");
      repeat ($urandom % 5) @(posedge clk);
    end
    // 3. update through one
    @(negedge clk);
    h_phase = {1'b1, 22'd5};   // H = 1 + 5 counts
    upd = 1;
    @(posedge clk); #1;
    upd = 0;
    chk(fire, "fire after H >= 1");
    chk(phase == 22'd6, $sformatf("phase after H >= 1: %0d", phase));
    @(posedge clk); #1;
    chk(!fire, "single fire");
    // 4. rate correction +1/4 count per cycle
    @(negedge clk);
    h_phase = '0; upd = 1;
    ci_we = 1; ci_wdata = (PB+FB)'(64'd1 << 30);
    @(posedge clk); #1;
    upd = 0; ci_we = 0;
    begin
      logic [PB-1:0] p0;
      p0 = phase;
      repeat (5000) @(posedge clk);
      #1;
      chk(phase == PB'(p0 + 5000 + 1250 - 0), $sformatf("corrected phase %0d, start %0d", phase, p0));
    end
    // -6 ppm: the period grows by about 25 cycles (2^22 * 6e-6)
    @(negedge clk);
    ci_we = 1; ci_wdata = (PB+FB)'(-64'sd25770);
    @(posedge clk); #1; ci_we = 0;
    last_fire = -1; fires = 0;
    for (k = 1; k <= 2 * ONE + 100 && fires < 3; k++) begin
      @(posedge clk); #1;
      if (fire) begin
        if (last_fire >= 0) begin
          period = k - last_fire;
          chk(period >= ONE + 24 && period <= ONE + 27, $sformatf("-6 ppm period %0d", period));
        end
        last_fire = k;
        fires++;
        if (tx_trigger) trig++;
      end
    end
    chk(fires >= 2, "fires with correction");
    chk(ci == (PB+FB)'(-64'sd25770), "c_i read back");
    $display("tx triggers %0d", trig);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
