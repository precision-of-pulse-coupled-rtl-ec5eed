// tb_sync_algorithm: the four phase response functions against a reference
// written with real numbers straight from the formulas:
//   PS    H = min(1, e*phi + 1)
//   SISA  H = 1.5*phi mod 1, and H(1) = 0.5 when the oscillator fires
//   IES   H = Ht(phi - h(tau_min) mod 1) + h(tau_min)
//   IES*  H = Ht(phi - h(tau_bar) mod 1) + h(tau_bar)
// Ht(x) = a(x - h(tau_max)) + h(tau_max) for x <= 1/2, b(x - 1) + 1 above.
// H may differ from the reference by at most 2 counts (fixed-point
// rounding). The refractory bound is checked at its edge: no update at
// phi = phi_ref, an update at phi_ref + 1 (889 counts for IES/IES*, 1777
// for PS, 2^21 + 1777 for SISA, from the paper's delays and nu_max = 6 ppm).
module tb_sync_algorithm;
  import pco_pkg::*;
  localparam int unsigned PB = 22;
  localparam real N = 4194304.0;
  localparam real TMIN = 868.0, TMAX = 888.0, TBAR = 877.0;
  logic [PB-1:0] phase;
  logic fire, rx;
  logic [3:0] upd;
  logic [PB:0] h [4];
  int checks = 0, failures = 0;

  sync_algorithm #(.ALGO(ALGO_PS))       u_ps   (.phase, .fire, .rx_sync(rx), .upd(upd[0]), .h_phase(h[0]));
  sync_algorithm #(.ALGO(ALGO_SISA))     u_sisa (.phase, .fire, .rx_sync(rx), .upd(upd[1]), .h_phase(h[1]));
  sync_algorithm #(.ALGO(ALGO_IES))      u_ies  (.phase, .fire, .rx_sync(rx), .upd(upd[2]), .h_phase(h[2]));
  sync_algorithm                         u_iess (.phase, .fire, .rx_sync(rx), .upd(upd[3]), .h_phase(h[3]));

  function automatic real ht(input real x);
    real a, b, hmax, hmin;
    hmax = TMAX / N; hmin = TMIN / N;
    a = (0.25 - 2.0 * hmax - hmin) / (0.5 - hmax);
    b = 0.5 + 2.0 * hmin - 2.0 * hmax;
    if (x <= 0.5) return a * (x - hmax) + hmax;
    else          return b * (x - 1.0) + 1.0;
  endfunction

  function automatic real ref_h(input int alg, input real phi);
    real x, r;
    case (alg)
      0: begin r = 2.718281828459045 * phi + 1.0; if (r > 1.0) r = 1.0; end
      1: begin r = 1.5 * phi; r = r - $floor(r); end
      2: begin x = phi - TMIN / N; if (x < 0) x += 1.0; r = ht(x) + TMIN / N; end
      default: begin x = phi - TBAR / N; if (x < 0) x += 1.0; r = ht(x) + TBAR / N; end
    endcase
    return r;
  endfunction

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", msg); end
  endtask

  initial begin
    real phi, r, got;
    fire = 0; rx = 1;
    for (int i = 0; i < 4000; i++) begin
      phase = (i < 10) ? PB'(i * 419430 + 5000) : PB'($urandom);
      #1;
      phi = real'(phase) / N;
      for (int alg = 0; alg < 4; alg++) begin
        longint refc;
        if (alg == 1 && phase <= 22'(2097152 + 1777)) continue;
        if (alg == 0 && phase <= 22'd1777) continue;
        if (alg >= 2 && phase <= 22'd889) continue;
        r = ref_h(alg, phi);
        got = real'(h[alg]);
        chk(upd[alg], $sformatf("alg %0d no update at %0d", alg, phase));
        chk(got - r * N <= 2.0 && r * N - got <= 2.0,
            $sformatf("alg %0d phi=%0d H=%0d ref=%f", alg, phase, h[alg], r * N));
      end
    end
    // refractory edges
    phase = 22'd889;  #1; chk(!upd[2] && !upd[3], "IES refractory at 889");
    phase = 22'd890;  #1; chk(upd[2] && upd[3], "IES update at 890");
    phase = 22'd1777; #1; chk(!upd[0], "PS refractory at 1777");
    phase = 22'd1778; #1; chk(upd[0], "PS update at 1778");
    phase = 22'(2097152 + 1777); #1; chk(!upd[1], "SISA refractory");
    phase = 22'(2097152 + 1778); #1; chk(upd[1], "SISA update");
    // no reception, no update
    rx = 0; phase = 22'd3000000; #1; chk(upd == 4'b0000, "no update without reception");
    // SISA self-adjustment at phi = 1
    fire = 1; phase = 22'd1; #1;
    chk(upd == 4'b0010, "only SISA adjusts on firing");
    chk(h[1] == 23'(2097152 + 1), $sformatf("SISA H(1) = %0d", h[1]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
