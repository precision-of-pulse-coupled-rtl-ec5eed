// tb_offset_accumulator: random enables, targets H and current phases. The
// accumulated offset must follow offset += H - phase (mod 2^22) exactly when
// enable is high and hold otherwise; the expected value is kept by the
// testbench. A second part closes the loop with a free counter to check that
// the resulting sum lands exactly on H.
module tb_offset_accumulator;
  localparam int unsigned PB = 22;
  localparam logic [PB-1:0] MASK = '1;
  logic clk = 0, rst_n = 0, enable = 0;
  logic [PB-1:0] h_phase = 0, phase = 0, offset;
  logic [PB-1:0] exp_off;
  logic [PB-1:0] cnt;
  int checks = 0, failures = 0;

  offset_accumulator dut (.clk, .rst_n, .enable, .h_phase, .phase, .offset);

  always #12.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    exp_off = 0;
    for (int i = 0; i < 2000; i++) begin
      enable  <= ($urandom % 3) == 0;
      h_phase <= PB'($urandom);
      phase   <= PB'($urandom);
      @(posedge clk); #1;
      if (enable) exp_off = (exp_off + h_phase - phase) & MASK;
      checks++;
      if (offset !== exp_off) begin
        failures++;
        if (failures < 10) $display("i=%0d offset=%h exp=%h", i, offset, exp_off);
      end
    end
    // closed loop: phase = cnt + offset, a jump must land on H
    enable <= 0;
    cnt = PB'($urandom);
    for (int j = 0; j < 50; j++) begin
      logic [PB-1:0] target;
      target = PB'($urandom);
      phase   <= cnt + offset;
      h_phase <= target;
      enable  <= 1;
      #1;
      @(posedge clk); #1;
      cnt++;
      enable <= 0;
      checks++;
      if (PB'(cnt + offset) !== PB'(target + 1)) begin
        failures++;
        $display("closed loop: sum=%h target+1=%h", PB'(cnt + offset), PB'(target + 1));
      end
      repeat (3) begin @(posedge clk); #1; cnt++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
