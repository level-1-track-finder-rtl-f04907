// tb_kf_update -- compares kf_update with the Kalman update computed here in
// floating point, for random states, covariances (positive definite),
// lever arms, measurements and variances in the ranges the fitter uses.
// Tolerances cover the Q16 truncation of the gain and of the products.
module tb_kf_update;
  import l1tf_tb_pkg::*;

  int checks = 0, failures = 0;

  logic signed [63:0] a, b, p00, p01, p11, h, m, v;
  logic signed [63:0] a_n, b_n, p00_n, p01_n, p11_n, chi2;

  kf_update dut (.*);

  function automatic longint toq(real x);
    return longint'($floor(x * 65536.0 + 0.5));
  endfunction
  function automatic real fromq(logic signed [63:0] x);
    return real'(x) / 65536.0;
  endfunction

  task automatic cmp(string name, logic signed [63:0] got, real expv, real tol);
    checks++;
    if (absr(fromq(got) - expv) > tol) begin
      failures++;
      $display("FAIL %s: %f expected %f", name, fromq(got), expv);
    end
  endtask

  initial begin
    for (int i = 0; i < 20000; i++) begin
      real ra, rb, r00, r01, r11, rh, rm, rv;
      real g0, g1, s, k0, k1, res, tol;
      ra  = urand(-10000.0, 10000.0);
      rb  = urand(-800.0, 800.0);
      r00 = urand(0.5, 4000.0);
      r11 = urand(0.5, 4000.0);
      r01 = urand(-0.95, 0.95) * $sqrt(r00 * r11);
      rh  = urand(-1.5, 2.0);
      rv  = urand(0.5, 50.0);
      rm  = ra + rb * rh + urand(-200.0, 200.0);
      a = toq(ra); b = toq(rb); p00 = toq(r00); p01 = toq(r01); p11 = toq(r11);
      h = toq(rh); m = toq(rm); v = toq(rv);
      // use the quantised inputs for the reference
      ra = fromq(a); rb = fromq(b); r00 = fromq(p00); r01 = fromq(p01); r11 = fromq(p11);
      rh = fromq(h); rm = fromq(m); rv = fromq(v);
      #1;
      g0  = r00 + rh * r01;
      g1  = r01 + rh * r11;
      s   = g0 + rh * g1 + rv;
      k0  = g0 / s;
      k1  = g1 / s;
      res = rm - (ra + rh * rb);
      tol = 0.01 + 4.0e-5 * absr(res) + 2.0e-4;
      cmp("a", a_n, ra + k0 * res, tol);
      cmp("b", b_n, rb + k1 * res, tol);
      tol = 0.01 + 4.0e-5 * (absr(g0) + absr(g1));
      cmp("p00", p00_n, r00 - k0 * g0, tol);
      cmp("p01", p01_n, r01 - k0 * g1, tol);
      cmp("p11", p11_n, r11 - k1 * g1, tol);
      cmp("chi2", chi2, res * res / s, 0.01 + 1.0e-4 * res * res / s);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
