// tb_tracklet_calc -- feeds stub pairs of random tracks (floating-point truth,
// rounded to the stub grid) into tracklet_calc, one pair per clock, and
// checks one clock later: the pT and z0 decisions (tracks well inside or well
// outside the cuts), the four parameters against the truth, and the four
// projections against the truth positions in the other layers, with
// tolerances that follow from the half-LSB rounding of the two seed stubs.
module tb_tracklet_calc;
  import l1tf_pkg::*;
  import l1tf_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid, out_valid, rej_pt, rej_z0;
  seed_t       in_seed;
  layer_stub_t in_inner, in_outer;
  tracklet_t   out_tl;

  tracklet_calc dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  int n_ok = 0, n_pt = 0, n_z0 = 0, n_inv = 0;

  task automatic judge(trk_truth_t tr, int s, int kind);
    real dr, tol_b, tol;
    dr = radius(2*s+1) - radius(2*s);
    if (kind == 0) begin
      chk(out_valid && !rej_pt && !rej_z0, "good tracklet rejected");
      if (!out_valid) return;
      n_ok++;
      tol_b = 256.0 / dr + 0.01;
      chk(absr(q16(out_tl.trk.par.b_phi) - b_phi_of(tr)) <= tol_b,
          $sformatf("b_phi %f vs %f", q16(out_tl.trk.par.b_phi), b_phi_of(tr)));
      chk(absr(q16(out_tl.trk.par.b_z) - b_z_of(tr)) <= tol_b, "b_z");
      tol = 0.5 + 1.0 * absr(real'(R_REF_MM) - radius(2*s)) / dr + 0.01;
      chk(absr(q16(out_tl.trk.par.a_phi) - a_phi_of(tr, 0)) <= tol,
          $sformatf("a_phi %f vs %f", q16(out_tl.trk.par.a_phi), a_phi_of(tr, 0)));
      chk(absr(q16(out_tl.trk.par.a_z) - a_z_of(tr)) <= tol, "a_z");
      chk(int'(out_tl.trk.seed) == s && out_tl.trk.st[2*s].valid && out_tl.trk.st[2*s+1].valid,
          "seed stubs");
      for (int p = 0; p < N_PROJ; p++) begin
        int  L = proj_layer(s, p);
        real ep, ez;
        ep  = real'(local_phi(0, 0)) + phi_at(tr, L);
        ez  = z_at(tr, L);
        tol = 1.0 + 1.0 * absr(radius(L) - radius(2*s)) / dr;
        chk(int'(out_tl.proj[p].layer) == L, "projection layer");
        if (ep > 2.0 + tol && ep < PHI_SPAN - 2.0 - tol && absr(ez) < 1020.0 - tol) begin
          chk(out_tl.proj[p].valid, "projection should be valid");
          chk(absr(real'(out_tl.proj[p].phi) - ep) <= tol,
              $sformatf("seed %0d proj L%0d phi %0d vs %f", s, L, out_tl.proj[p].phi, ep));
          chk(absr(real'(out_tl.proj[p].z) - ez) <= tol, "projection z");
        end else if (ep < -tol - 2.0 || ep > PHI_SPAN + tol + 2.0 || absr(ez) > 1030.0 + tol) begin
          chk(!out_tl.proj[p].valid, "projection should be invalid");
          n_inv++;
        end
      end
    end else if (kind == 1) begin
      chk(!out_valid && rej_pt, "low-pT pair not rejected");
      n_pt++;
    end else begin
      chk(!out_valid && !rej_pt && rej_z0, "large-z0 pair not rejected");
      n_z0++;
    end
  endtask

  initial begin
    trk_truth_t prev_tr;
    int prev_s, prev_kind;
    bit prev_v = 0;
    in_valid = 1'b0; in_seed = '0; in_inner = '0; in_outer = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      trk_truth_t tr;
      int s, kind;
      gstub_t g1, g2;
      s    = irand(0, N_SEED - 1);
      kind = irand(0, 2);
      tr   = random_track(0, 140.0);
      if (i % 3 == 0) tr.phi0 += urand(-0.45, 0.45);   // projections may leave the sector
      if (kind == 1) tr.rinv = (irand(0, 1) ? 1.0 : -1.0) * urand(1.15, 3.0) * RINV_2GEV;
      if (kind == 2) tr.z0 = (irand(0, 1) ? 1.0 : -1.0) * urand(165.0, 400.0);
      if (kind == 2) tr.t = urand(-0.3, 0.3);
      g1 = stub_of(tr, 2*s);
      g2 = stub_of(tr, 2*s+1);
      // keep both seed stubs inside the local phi range
      if (local_phi(int'(g1.phi), 0) < 0 || local_phi(int'(g1.phi), 0) >= PHI_SPAN ||
          local_phi(int'(g2.phi), 0) < 0 || local_phi(int'(g2.phi), 0) >= PHI_SPAN) begin
        i--;
        continue;
      end
      @(negedge clk);
      if (prev_v) judge(prev_tr, prev_s, prev_kind);
      in_valid = 1'b1;
      in_seed  = seed_t'(s);
      in_inner = '{valid: 1'b1, id: '{layer: layer_t'(2*s), default: '0},
                   phi: to_local(g1, 0).phi, z: g1.z};
      in_outer = '{valid: 1'b1, id: '{layer: layer_t'(2*s+1), default: '0},
                   phi: to_local(g2, 0).phi, z: g2.z};
      prev_tr = tr; prev_s = s; prev_kind = kind; prev_v = 1;
    end
    @(negedge clk);
    judge(prev_tr, prev_s, prev_kind);
    in_valid = 1'b0;
    @(negedge clk);
    chk(!out_valid && !rej_pt && !rej_z0, "no output without input");
    chk(n_ok > 500 && n_pt > 500 && n_z0 > 500 && n_inv > 10, "coverage");
    $display("ok %0d pt %0d z0 %0d invalid projections %0d", n_ok, n_pt, n_z0, n_inv);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
