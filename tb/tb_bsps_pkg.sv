// tb_bsps_pkg: self-checking testbench of the fixed-point arithmetic of
// bsps_pkg. Each function is swept over its working range and compared with
// the real-valued system functions; the tolerances are those the units rely
// on (absolute for Phi and exp, relative or absolute for the others).
// The package is combinational, so no clock or cycle count applies; a
// watchdog still bounds the run.
module tb_bsps_pkg;
  import bsps_pkg::*;

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  function automatic fx_t to_fx(real r);
    return fx_t'(r * 4294967296.0);
  endfunction

  function automatic real from_fx(fx_t v);
    return real'(v) / 4294967296.0;
  endfunction

  function automatic real absr(real r);
    return r < 0 ? -r : r;
  endfunction

  function automatic real psi_ref(real x);
    real acc = 0;
    while (x < 10) begin acc -= 1.0 / x; x += 1.0; end
    return acc + $ln(x) - 0.5 / x - 1.0 / (12.0 * x * x) + 1.0 / (120.0 * x ** 4);
  endfunction

  // Phi by Simpson integration of the normal density
  function automatic real phi_ref(real z);
    real h, s, t, za;
    za = absr(z);
    if (za == 0) return 0.5;
    h = za / 2000.0;
    s = 1.0 + $exp(-za * za / 2.0);
    for (int i = 1; i < 2000; i++) begin
      t = i * h;
      s += ((i % 2) ? 4.0 : 2.0) * $exp(-t * t / 2.0);
    end
    s = s * h / 3.0 / $sqrt(2.0 * 3.14159265358979);
    return z < 0 ? 0.5 - s : 0.5 + s;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real a, b, r;
    for (int n = 0; n < 400; n++) begin
      a = (real'($urandom_range(0, 2000000)) - 1000000.0) / 1000.0;
      b = (real'($urandom_range(1, 2000000)) - 1000000.0) / 3000.0;
      r = from_fx(fx_mul(to_fx(a), to_fx(b)));
      check(absr(r - a * b) < 1e-6 * absr(a * b) + 1e-6, $sformatf("mul %f %f -> %f", a, b, r));
      if (absr(b) > 1e-3) begin
        r = from_fx(fx_div(to_fx(a), to_fx(b)));
        check(absr(r - a / b) < 1e-6 * absr(a / b) + 1e-6, $sformatf("div %f %f -> %f", a, b, r));
      end
      a = real'($urandom_range(1, 1000000)) / 1000.0;
      r = from_fx(fx_sqrt(to_fx(a)));
      check(absr(r - $sqrt(a)) < 1e-6, $sformatf("sqrt %f -> %f", a, r));
      r = from_fx(fx_ln(to_fx(a)));
      check(absr(r - $ln(a)) < 1e-4, $sformatf("ln %f -> %f", a, r));
      a = real'($urandom_range(0, 40000)) / 1000.0;
      r = from_fx(fx_exp_neg(to_fx(a)));
      check(absr(r - $exp(-a)) < 1e-6, $sformatf("exp(-%f) -> %g", a, r));
      a = (real'($urandom_range(0, 16000)) - 8000.0) / 1000.0;
      r = from_fx(fx_phi(to_fx(a)));
      check(absr(r - phi_ref(a)) < 1e-6,
            $sformatf("phi %f -> %f", a, r));
      a = real'($urandom_range(10, 100000)) / 1000.0;
      r = from_fx(fx_digamma(to_fx(a)));
      check(absr(r - psi_ref(a)) < 1e-3, $sformatf("digamma %f -> %f vs %f", a, r, psi_ref(a)));
    end
    // saturation and special cases
    check(fx_mul(FX_MAX, to_fx(4.0)) == FX_MAX, "mul saturates high");
    check(fx_mul(-FX_MAX, to_fx(4.0)) == -FX_MAX, "mul saturates low");
    check(fx_div(FX_ONE, '0) == FX_MAX, "divide by zero");
    check(fx_exp_neg(to_fx(100.0)) == 0, "exp underflow");
    check(fx_exp_neg('0) == FX_ONE, "exp(0)");
    check(fx_from_m(fx_to_m(to_fx(12.5))) == to_fx(12.5), "model field round trip");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
