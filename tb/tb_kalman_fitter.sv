// tb_kalman_fitter -- fits tracks built from random truth tracks with noisy
// stubs in four to six layers, starting from perturbed coarse parameters.
// Checks the fitted parameters and chi-squares against the same filter run
// here in floating point, checks that the fit is closer to the truth than
// the starting point on average, checks the stub mask and ids, and checks
// that each result leaves exactly N_LAYERS + 2 clocks after the track was
// taken, with in_ready low in between.
module tb_kalman_fitter;
  import l1tf_pkg::*;
  import l1tf_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       in_valid, in_ready, out_valid;
  track_t     in_trk;
  fit_track_t out_fit;

  kalman_fitter dut (.*);

  localparam real P0P = 256.0, P0Z = 4096.0, VP = 1.0, VZPS = 1.0, VZ2S = 36.0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  // floating-point reference of one plane
  task automatic ref_fit(input real a0, input real b0, input real m [N_LAYERS],
                         input bit inuse [N_LAYERS], input real p0, input bit zplane,
                         output real a, output real b, output real chi2);
    real p00, p01, p11, g0, g1, s, k0, k1, r, h, v;
    a = a0; b = b0; p00 = p0; p01 = 0.0; p11 = p0; chi2 = 0.0;
    for (int l = 0; l < N_LAYERS; l++) begin
      if (!inuse[l]) continue;
      h  = (radius(l) - real'(R_REF_MM)) / 256.0;
      v  = zplane ? ((l < 3) ? VZPS : VZ2S) : VP;
      g0 = p00 + h * p01;
      g1 = p01 + h * p11;
      s  = g0 + h * g1 + v;
      k0 = g0 / s;  k1 = g1 / s;
      r  = m[l] - (a + h * b);
      a  = a + k0 * r;  b = b + k1 * r;
      p00 = p00 - k0 * g0;  p01 = p01 - k0 * g1;  p11 = p11 - k1 * g1;
      chi2 += r * r / s;
    end
  endtask

  real sum_err_start = 0.0, sum_err_fit = 0.0;

  initial begin
    in_valid = 1'b0; in_trk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 500; i++) begin
      trk_truth_t tr;
      track_t     t;
      real mp [N_LAYERS], mz [N_LAYERS];
      bit  inuse [N_LAYERS];
      real ea, eb, eaz, ebz, xa, xb, xaz, xbz, cp, cz;
      int  nuse, lat;
      tr = random_track(0);
      t  = '0;
      t.seed = seed_t'(irand(0, 2));
      nuse = 0;
      for (int l = 0; l < N_LAYERS; l++) begin
        stub_t s;
        s = to_local(stub_of(tr, l, irand(-1, 1), (l < 3) ? irand(-1, 1) : irand(-10, 10)), 0);
        inuse[l] = (irand(0, 4) != 0);
        if (inuse[l]) nuse++;
        t.st[l] = '{valid: inuse[l], id: '{layer: layer_t'(l), vm: vm_t'($urandom), zb: '0, slot: '0},
                    phi: s.phi, z: s.z};
        mp[l] = real'(s.phi);
        mz[l] = real'(s.z);
      end
      if (nuse < 4) begin
        i--;
        continue;
      end
      xa  = a_phi_of(tr, 0) + urand(-5.0, 5.0);
      xb  = b_phi_of(tr) + urand(-5.0, 5.0);
      xaz = a_z_of(tr) + urand(-10.0, 10.0);
      xbz = b_z_of(tr) + urand(-10.0, 10.0);
      t.par = '{a_phi: par_t'(longint'(xa * 65536.0)), b_phi: par_t'(longint'(xb * 65536.0)),
                a_z: par_t'(longint'(xaz * 65536.0)), b_z: par_t'(longint'(xbz * 65536.0))};
      ref_fit(q16(t.par.a_phi), q16(t.par.b_phi), mp, inuse, P0P, 1'b0, ea, eb, cp);
      ref_fit(q16(t.par.a_z), q16(t.par.b_z), mz, inuse, P0Z, 1'b1, eaz, ebz, cz);
      // hand over the track
      @(negedge clk);
      chk(in_ready, "ready when idle");
      in_valid = 1'b1;
      in_trk   = t;
      @(negedge clk);
      in_valid = 1'b0;
      lat = 1;
      while (!out_valid) begin
        chk(!in_ready, "busy while fitting");
        @(negedge clk);
        lat++;
      end
      chk(lat == N_LAYERS + 2, $sformatf("latency %0d", lat));
      chk(absr(q16(out_fit.par.a_phi) - ea) < 0.05 && absr(q16(out_fit.par.b_phi) - eb) < 0.05,
          $sformatf("phi fit %f %f expected %f %f", q16(out_fit.par.a_phi), q16(out_fit.par.b_phi), ea, eb));
      chk(absr(q16(out_fit.par.a_z) - eaz) < 0.05 && absr(q16(out_fit.par.b_z) - ebz) < 0.05,
          $sformatf("z fit %f %f expected %f %f", q16(out_fit.par.a_z), q16(out_fit.par.b_z), eaz, ebz));
      chk(absr(real'(out_fit.chi2_phi) / 65536.0 - cp) < 0.01 + 1e-3 * cp &&
          absr(real'(out_fit.chi2_z) / 65536.0 - cz) < 0.01 + 1e-3 * cz, "chi2");
      chk(out_fit.seed == t.seed, "seed");
      for (int l = 0; l < N_LAYERS; l++)
        chk(out_fit.mask[l] == inuse[l] && (!inuse[l] || out_fit.ids[l] == t.st[l].id), "mask / ids");
      sum_err_start += absr(xb - b_phi_of(tr));
      sum_err_fit   += absr(q16(out_fit.par.b_phi) - b_phi_of(tr));
    end
    chk(sum_err_fit < 0.5 * sum_err_start, "fit improves the curvature");
    $display("mean |b_phi error|: start %f fit %f", sum_err_start / 500.0, sum_err_fit / 500.0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
