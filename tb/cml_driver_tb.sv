`timescale 1ps / 1fs
// cml_driver_tb -- applies every combination of the three tap bits for a
// set of tap codes, including the a0 = -0.2, a1 = 0 setting of the
// measured eye, and compares vout_diff with 0.4 V * (s0 + a0 s1 + a1 s2)
// and the single-ended levels with 1.4 V +/- vout_diff / 2.
module cml_driver_tb;
  logic [2:0] d_p, d_n;
  logic signed [4:0] a0_code, a1_code;
  real vp, vn, vd;
  int checks = 0, failures = 0;

  cml_driver dut (.d_p, .d_n, .a0_code, .a1_code, .vout_p(vp), .vout_n(vn), .vout_diff(vd));

  function automatic real absr(real x);
    return x < 0.0 ? -x : x;
  endfunction

  initial begin
    #1ms;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int codes [6][2] = '{'{0, 0}, '{-4, 0}, '{-4, -2}, '{3, 1}, '{-16, 15}, '{15, -16}};
    real s [3];
    real exp;
    foreach (codes[c]) begin
      a0_code = 5'(codes[c][0]);
      a1_code = 5'(codes[c][1]);
      for (int v = 0; v < 8; v++) begin
        d_p = 3'(v);
        d_n = ~d_p;
        #10;
        for (int k = 0; k < 3; k++) s[k] = d_p[k] ? 1.0 : -1.0;
        exp = 0.4 * (s[0] + (codes[c][0] / 20.0) * s[1] + (codes[c][1] / 20.0) * s[2]);
        checks += 3;
        if (absr(vd - exp) > 1e-9) begin failures++; $display("FAIL code %0d v=%0d vd=%f exp=%f", c, v, vd, exp); end
        if (absr(vp - (1.4 + exp / 2.0)) > 1e-9) failures++;
        if (absr(vn - (1.4 - exp / 2.0)) > 1e-9) failures++;
      end
    end
    // a0 = -0.2: a transition bit is emphasised (0.48 V), a repeated bit is not (0.32 V)
    a0_code = -5'sd4; a1_code = 0;
    d_p = 3'b001; d_n = ~d_p; #10;
    checks++; if (absr(vd - 0.48) > 1e-9) failures++;
    d_p = 3'b011; d_n = ~d_p; #10;
    checks++; if (absr(vd - 0.32) > 1e-9) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
