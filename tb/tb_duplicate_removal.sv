// tb_duplicate_removal -- feeds track candidates of several random particles
// (subsets of each particle's six stubs, some with one stub swapped for a
// nearby one, some pairs of distinct particles sharing three stubs) into
// duplicate_removal and compares the flushed list, read with random
// back-pressure, with a reference list built here: a candidate sharing at
// least four stubs with an earlier kept one is merged into the first such one
// (filling its empty layers), otherwise kept.  One event overfills the store.
module tb_duplicate_removal;
  import l1tf_pkg::*;
  import l1tf_tb_pkg::*;

  localparam int MAXT = 32;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic         clear, in_valid, flush, out_valid, out_ready, done;
  track_t       in_trk, out_trk;
  logic [5:0]   n_kept;
  logic [15:0]  n_merged, n_overflow;

  duplicate_removal #(.MAX_TRK(MAXT)) dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  function automatic int n_shared(track_t a, track_t b);
    int n = 0;
    for (int l = 0; l < N_LAYERS; l++)
      if (a.st[l].valid && b.st[l].valid && a.st[l].id == b.st[l].id) n++;
    return n;
  endfunction

  function automatic layer_stub_t rnd_stub(int l);
    layer_stub_t s;
    s.valid = 1'b1;
    s.id    = '{layer: layer_t'(l), vm: vm_t'($urandom), zb: zb_t'($urandom), slot: slot_t'($urandom)};
    s.phi   = phi_t'($urandom);
    s.z     = z_t'($urandom);
    return s;
  endfunction

  int tot_merged = 0, tot_ovf = 0;

  task automatic run_event(int n_particles);
    track_t cands [$];
    track_t ref_kept [$];
    int     exp_merged = 0, exp_ovf = 0, got = 0;
    for (int p = 0; p < n_particles; p++) begin
      track_t full;
      full = '0;
      full.par  = '{a_phi: 40'($urandom), b_phi: 40'($urandom), a_z: 40'($urandom), b_z: 40'($urandom)};
      for (int l = 0; l < N_LAYERS; l++) full.st[l] = rnd_stub(l);
      if (p > 0 && irand(0, 3) == 0) begin
        // distinct particle sharing exactly three stubs with the previous one
        track_t prevp = cands[$];
        int sh = 0;
        for (int l = 0; l < N_LAYERS && sh < 3; l++)
          if (prevp.st[l].valid) begin
            full.st[l] = prevp.st[l];
            sh++;
          end
      end
      for (int c = irand(1, 3); c > 0; c--) begin
        track_t t = full;
        t.seed = seed_t'(irand(0, 2));
        for (int k = irand(0, 2); k > 0; k--) t.st[irand(0, 5)].valid = 1'b0;
        if (irand(0, 3) == 0) t.st[irand(0, 5)] = rnd_stub(0);   // ambiguous stub
        cands.push_back(t);
      end
    end
    // reference
    foreach (cands[i]) begin
      int hit = -1;
      foreach (ref_kept[k]) if (hit < 0 && n_shared(ref_kept[k], cands[i]) >= MERGE_SHARED) hit = k;
      if (hit >= 0) begin
        exp_merged++;
        for (int l = 0; l < N_LAYERS; l++)
          if (!ref_kept[hit].st[l].valid && cands[i].st[l].valid) ref_kept[hit].st[l] = cands[i].st[l];
      end else if (ref_kept.size() == MAXT) exp_ovf++;
      else ref_kept.push_back(cands[i]);
    end
    // drive
    foreach (cands[i]) begin
      @(negedge clk);
      in_valid = 1'b1;
      in_trk   = cands[i];
    end
    @(negedge clk);
    in_valid = 1'b0;
    chk(int'(n_kept) == ref_kept.size() && int'(n_merged) == exp_merged && int'(n_overflow) == exp_ovf,
        $sformatf("kept %0d/%0d merged %0d/%0d overflow %0d/%0d", n_kept, ref_kept.size(),
                  n_merged, exp_merged, n_overflow, exp_ovf));
    flush = 1'b1;
    @(negedge clk);
    flush = 1'b0;
    while (!done) begin
      out_ready = irand(0, 2) != 0;
      #1;
      if (out_valid && out_ready) begin
        chk(got < ref_kept.size() && out_trk == ref_kept[got], $sformatf("output %0d", got));
        got++;
      end
      @(negedge clk);
    end
    chk(got == ref_kept.size(), "number of tracks out");
    tot_merged += exp_merged;
    tot_ovf    += exp_ovf;
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
  endtask

  initial begin
    clear = 1'b0; in_valid = 1'b0; flush = 1'b0; out_ready = 1'b0; in_trk = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 30; e++) run_event(irand(1, 12));
    run_event(45);
    chk(tot_merged > 20 && tot_ovf > 0, "coverage");
    $display("merged %0d overflow %0d", tot_merged, tot_ovf);
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
