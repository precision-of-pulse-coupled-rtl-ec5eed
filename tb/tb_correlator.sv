// tb_correlator: baseband packets shaped like the transmitter's output
// (symbols of +/-3300 joined by linear interpolation, 8 samples per symbol:
// the level after AGC and carrier loop). Checks:
//   * a packet with the right sync word is detected exactly once: the sample
//     carrying the last sync symbol at full value is taken in at clock edge
//     k, sync_detected is set at edge k+2 (seen at the third sample step);
//   * the same packet inverted (180-degree carrier ambiguity) likewise;
//   * a packet with a different 32-bit word, random noise, and the right
//     packet at half level (below threshold) are never detected.
module tb_correlator;
  import pco_pkg::*;
  logic clk = 0, rst_n = 0;
  sample_t in_i = 0;
  logic det;
  int checks = 0, failures = 0;
  int ndet, det_t, t;

  correlator dut (.clk, .rst_n, .in_i, .sync_detected(det));

  always #12.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one sample period; the counter t names the sample applied next
  task automatic step();
    @(negedge clk);
    t++;
    if (det) begin ndet++; det_t = t; end
  endtask

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  // sends 96 symbols plus tails; returns the index of the sample holding the
  // last symbol at full value
  task automatic send(input logic [31:0] word, input int amp, output int t_last);
    logic [95:0] pkt;
    int s [98];
    pkt = {64'h5555_5555_5555_5555, word};
    s[0] = 0;
    for (int j = 0; j < 96; j++) s[j+1] = pkt[95-j] ? amp : -amp;
    s[97] = 0;
    t_last = -1;
    for (int j = 1; j < 98; j++)
      for (int m = 0; m < 8; m++) begin
        in_i = sample_t'(s[j-1] + (((s[j] - s[j-1]) * m) >>> 3));
        if (j == 97 && m == 0) t_last = t;
        step();
      end
    in_i = 0;
    repeat (100) begin step(); end
  endtask

  initial begin
    int tl;
    t = 0; ndet = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (300) begin step(); end
    // right word
    ndet = 0; send(32'hB53C_E24D, 3300, tl);
    chk(ndet == 1, $sformatf("detections %0d", ndet));
    chk(det_t == tl + 3, $sformatf("detection at %0d, last symbol at %0d", det_t, tl));
    repeat (800) begin step(); end
    // inverted
    ndet = 0; send(32'hB53C_E24D, -3300, tl);
    chk(ndet == 1, $sformatf("inverted detections %0d", ndet));
    chk(det_t == tl + 3, "inverted detection time");
    repeat (800) begin step(); end
    // wrong word
    ndet = 0; send(32'h11B8_F12D, 3300, tl);
    chk(ndet == 0, "wrong word detected");
    // half level
    ndet = 0; send(32'hB53C_E24D, 1650, tl);
    chk(ndet == 0, "weak packet detected");
    // noise
    ndet = 0;
    for (int n = 0; n < 20000; n++) begin
      in_i = sample_t'(int'($urandom % 6001) - 3000);
      step();
    end
    chk(ndet == 0, $sformatf("noise detections %0d", ndet));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
