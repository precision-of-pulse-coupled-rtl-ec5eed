// tb_upconverter: random baseband input; the output one cycle later must be
// x * exp(j*pi*n/2) with n counting cycles from reset: (x,0), (0,x), (-x,0),
// (0,-x). Also checks, through a reference downconversion, that multiplying
// by exp(-j*pi*n/2) returns the input.
module tb_upconverter;
  import pco_pkg::*;
  logic clk = 0, rst_n = 0;
  sample_t in_i = 0, out_i, out_q;
  int checks = 0, failures = 0;

  upconverter dut (.clk, .rst_n, .in_i, .out_i, .out_q);

  always #12.5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int x, n, ei, eq, back;
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    n = 0;
    for (int k = 0; k < 2000; k++) begin
      x = int'($urandom % 65535) - 32767;
      in_i = sample_t'(x);
      @(negedge clk);
      case (n % 4)
        0: begin ei = x;  eq = 0;  end
        1: begin ei = 0;  eq = x;  end
        2: begin ei = -x; eq = 0;  end
        default: begin ei = 0; eq = -x; end
      endcase
      checks++;
      if (out_i !== sample_t'(ei) || out_q !== sample_t'(eq)) begin
        failures++;
        if (failures < 10) $display("k=%0d x=%0d out=(%0d,%0d) exp=(%0d,%0d)", k, x, out_i, out_q, ei, eq);
      end
      // reference downconversion: real part of (I + jQ) * exp(-j*pi*n/2)
      case (n % 4)
        0: back = out_i;
        1: back = out_q;
        2: back = -out_i;
        default: back = -out_q;
      endcase
      checks++; if (back != x) failures++;
      n++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
