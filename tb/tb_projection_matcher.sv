// tb_projection_matcher -- builds tracklets with known projections, places
// stubs at random residuals around them (plus unrelated stubs) in a VM stub
// memory, runs projection_matcher and checks for every projection that the
// stub chosen is the one with the smallest |phi residual| among those inside
// the residual window (worked out here from the stub list), that tracklets
// with fewer than two matches are rejected, that seed stubs and parameters
// pass unchanged, and that the run takes no more clocks than one per
// projection plus one per stub slot (or empty bin) in the search windows.
module tb_projection_matcher;
  import l1tf_pkg::*;
  import l1tf_tb_pkg::*;

  localparam int NVM = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic     clear, wr_en, wr_full;
  stub_id_t wr_bin, ra_addr, rb_addr;
  stub_t    wr_stub, ra_stub, rb_stub;
  slot_t    wr_slot;
  cnt_t     ra_count, rb_count;
  cnt_t     counts [N_LAYERS][NVM][N_ZBIN];

  vm_stub_memory #(.N_VM(NVM)) mem (.*);

  logic      start, busy, done, out_valid, rej_few, proj_hit, proj_miss;
  tracklet_t tl;
  track_t    out_trk;

  projection_matcher #(.N_VM(NVM)) dut (.clk, .rst_n, .start, .tl, .busy, .done,
    .rd_addr(rb_addr), .rd_stub(rb_stub), .rd_count(rb_count),
    .out_valid, .out_trk, .rej_few, .proj_hit, .proj_miss);

  assign ra_addr = '0;

  typedef struct { stub_id_t id; stub_t s; } stored_t;
  stored_t stored [$];

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  task automatic put(stub_t s);
    @(negedge clk);
    wr_en   = 1'b1;
    wr_stub = s;
    wr_bin  = '{layer: s.layer, vm: vm_of({1'b0, s.phi}, NVM), zb: zb_of(14'(s.z)), slot: '0};
    #1;
    if (!wr_full) stored.push_back('{id: '{layer: wr_bin.layer, vm: wr_bin.vm, zb: wr_bin.zb, slot: wr_slot}, s: s});
    @(posedge clk);
    #1;
    wr_en = 1'b0;
  endtask

  function automatic int vm_r(real phi);
    int v;
    if (phi < 0.0) phi = 0.0;
    if (phi > PHI_SPAN - 1) phi = PHI_SPAN - 1;
    v = int'($floor(phi * NVM / PHI_SPAN));
    return v;
  endfunction
  function automatic int zb_r(real z);
    int b = int'($floor((z + 1024.0) / 256.0));
    return (b < 0) ? 0 : (b > 7) ? 7 : b;
  endfunction

  int n_acc = 0, n_rej = 0, n_hit = 0, n_miss = 0;

  initial begin
    start = 1'b0; tl = '0; clear = 1'b0; wr_en = 1'b0; wr_bin = '0; wr_stub = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int tcase = 0; tcase < 300; tcase++) begin
      int   s, bound, cycles, nm;
      layer_stub_t exp_st [N_PROJ];
      stored.delete();
      @(negedge clk);
      clear = 1'b1;
      @(negedge clk);
      clear = 1'b0;
      s  = irand(0, N_SEED - 1);
      tl = '0;
      tl.trk.seed = seed_t'(s);
      tl.trk.par  = '{a_phi: 40'($urandom), b_phi: 40'($urandom), a_z: 40'($urandom), b_z: 40'($urandom)};
      tl.trk.st[2*s]   = '{valid: 1'b1, id: '{layer: layer_t'(2*s), default: '0}, phi: 14'd100, z: 12'sd5};
      tl.trk.st[2*s+1] = '{valid: 1'b1, id: '{layer: layer_t'(2*s+1), default: '0}, phi: 14'd200, z: 12'sd6};
      for (int p = 0; p < N_PROJ; p++) begin
        automatic int L = proj_layer(s, p);
        tl.proj[p] = '{valid: (irand(0, 9) != 0), layer: layer_t'(L),
                       phi: phi_t'(irand(0, PHI_SPAN - 1)), z: z_t'(irand(-1000, 1000))};
        for (int k = irand(0, 4); k > 0; k--)
          put('{layer: layer_t'(L), phi: phi_t'(int'(tl.proj[p].phi) + irand(-70, 70)),
                z: z_t'(int'(tl.proj[p].z) + irand(-160, 160))});
      end
      for (int k = 0; k < 10; k++)
        put('{layer: layer_t'(irand(0, 5)), phi: phi_t'(irand(0, PHI_SPAN - 1)), z: z_t'(irand(-1000, 1000))});
      // expected matches and clock bound
      nm    = 0;
      bound = 3 + N_PROJ;
      for (int p = 0; p < N_PROJ; p++) begin
        automatic int best = 1000;
        exp_st[p] = '0;
        if (!tl.proj[p].valid) continue;
        foreach (stored[i]) begin
          automatic int dp = int'(stored[i].s.phi) - int'(tl.proj[p].phi);
          automatic int dz = int'(stored[i].s.z) - int'(tl.proj[p].z);
          if (stored[i].s.layer == tl.proj[p].layer && (dp < 0 ? -dp : dp) <= PHI_CUT &&
              (dz < 0 ? -dz : dz) <= Z_CUT_MM && (dp < 0 ? -dp : dp) < best) begin
            best = (dp < 0 ? -dp : dp);
            exp_st[p] = '{valid: 1'b1, id: stored[i].id, phi: stored[i].s.phi, z: stored[i].s.z};
          end
        end
        if (exp_st[p].valid) nm++;
        for (int v = vm_r(real'(tl.proj[p].phi) - PHI_CUT); v <= vm_r(real'(tl.proj[p].phi) + PHI_CUT); v++)
          for (int b = zb_r(real'(tl.proj[p].z) - Z_CUT_MM); b <= zb_r(real'(tl.proj[p].z) + Z_CUT_MM); b++)
            bound += (counts[int'(tl.proj[p].layer)][v][b] == 0) ? 1 : int'(counts[int'(tl.proj[p].layer)][v][b]);
      end
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cycles = 1;
      while (!done) begin
        @(negedge clk);
        if (proj_hit) n_hit++;
        if (proj_miss) n_miss++;
        cycles++;
      end
      chk(cycles <= bound, $sformatf("%0d clocks, bound %0d", cycles, bound));
      chk(out_valid == (nm >= MIN_MATCH) && rej_few == (nm < MIN_MATCH), "accept decision");
      if (nm >= MIN_MATCH) n_acc++; else n_rej++;
      if (out_valid) begin
        chk(out_trk.par == tl.trk.par && out_trk.seed == tl.trk.seed &&
            out_trk.st[2*s] == tl.trk.st[2*s] && out_trk.st[2*s+1] == tl.trk.st[2*s+1], "seed part unchanged");
        for (int p = 0; p < N_PROJ; p++) begin
          automatic layer_stub_t got = out_trk.st[proj_layer(s, p)];
          if (!exp_st[p].valid) chk(!got.valid, "unexpected match");
          else begin
            automatic int dg = int'(got.phi) - int'(tl.proj[p].phi);
            automatic int de = int'(exp_st[p].phi) - int'(tl.proj[p].phi);
            // equal |residual| ties may pick either stub
            chk(got.valid && (got == exp_st[p] || (dg < 0 ? -dg : dg) == (de < 0 ? -de : de)),
                $sformatf("case %0d proj %0d: wrong stub", tcase, p));
          end
        end
      end
    end
    chk(n_acc > 20 && n_rej > 20 && n_hit > 50 && n_miss > 50, "coverage");
    $display("accepted %0d rejected %0d hits %0d misses %0d", n_acc, n_rej, n_hit, n_miss);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
