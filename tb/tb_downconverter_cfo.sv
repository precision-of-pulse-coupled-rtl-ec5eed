// tb_downconverter_cfo: BPSK at the fs/4 IF with a carrier frequency
// offset and an arbitrary carrier phase, generated with real arithmetic.
// The first 64 symbols are the 0x55 training pattern, then random data.
// After the training part the loop must have locked: at every symbol centre
// |Q| < 0.25 |I|, |I| close to the expected 0.82 * amplitude, and the sign of
// I must follow the data with one common sign (the 180-degree ambiguity of
// any BPSK carrier loop). Offsets of 0, +20 kHz and -40 kHz are tried.
module tb_downconverter_cfo;
  import pco_pkg::*;
  localparam real PI = 3.141592653589793;
  localparam real FS = 40.0e6;
  localparam real AMP = 4000.0;
  logic clk = 0, rst_n = 0;
  sample_t in_i = 0, in_q = 0, out_i, out_q;
  int checks = 0, failures = 0;

  downconverter_cfo dut (.clk, .rst_n, .in_i, .in_q, .out_i, .out_q);

  always #12.5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input real f_off, input real phi0);
    int bits [400];
    int sgn_ref, bad;
    real th, s;
    rst_n = 0; @(negedge clk); @(negedge clk); rst_n = 1;
    for (int k = 0; k < 400; k++) bits[k] = (k < 64) ? (k % 2) : int'($urandom % 2);
    sgn_ref = 0; bad = 0;
    for (int n = 0; n < 400 * 8; n++) begin
      s = bits[n / 8] ? AMP : -AMP;
      th = PI / 2.0 * real'(n % 4) + 2.0 * PI * f_off * real'(n) / FS + phi0;
      in_i = sample_t'($rtoi(s * $cos(th)));
      in_q = sample_t'($rtoi(s * $sin(th)));
      @(negedge clk);
      // out shows the sample given one edge earlier; check at symbol centres
      if (n / 8 >= 80 && n % 8 == 4) begin
        int si;
        si = (out_i > 0) ? 1 : -1;
        if (!bits[n / 8]) si = -si;
        if (sgn_ref == 0) sgn_ref = si;
        checks++;
        if (si != sgn_ref || 4 * ((out_q < 0) ? -int'(out_q) : int'(out_q)) > ((out_i < 0) ? -int'(out_i) : int'(out_i))
            || ((out_i < 0) ? -int'(out_i) : int'(out_i)) < 2800 || ((out_i < 0) ? -int'(out_i) : int'(out_i)) > 3800) begin
          failures++; bad++;
          if (bad < 5) $display("f=%0f sym %0d out=(%0d,%0d) bit %0d", f_off, n / 8, out_i, out_q, bits[n / 8]);
        end
      end
    end
  endtask

  initial begin
    repeat (2) @(negedge clk);
    run(0.0, 0.3);
    run(20.0e3, 2.0);
    run(-40.0e3, -1.2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
