// tb_l1tf_sector_top_vm32 -- the end-to-end test of tb_l1tf_sector_top run
// on a sector processor built with 32 virtual modules per layer (N_VM = 32),
// the finer of the two VM segmentations the algorithm allows.  The events,
// checks and mechanism counts are the same; with twice as many, half-width
// VMs the pair tables connect fewer stub combinations, so the processor must
// still find every track exactly once and make every mechanism occur.
module tb_l1tf_sector_top_vm32;
  import l1tf_pkg::*;
  import l1tf_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       in_valid, in_ready, in_last, out_valid, evt_done;
  gstub_t     in_stub;
  fit_track_t out_fit;
  evt_stats_t stats;

  l1tf_sector_top #(.N_VM(32)) dut (.*);

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  // ------------------------------------------------------------ events
  typedef struct {
    gstub_t     stubs [$];
    trk_truth_t truth [$];     // tracks that must be found
    int         n_outside;     // stubs of other sectors
    bit         check_tracks;
  } event_t;

  event_t events [$];

  function automatic void add_track(ref event_t e, input trk_truth_t tr);
    for (int l = 0; l < N_LAYERS; l++)
      e.stubs.push_back(stub_of(tr, l, irand(-1, 1), (l < 3) ? irand(-1, 1) : irand(-8, 8)));
  endfunction

  function automatic void add_noise(ref event_t e, input int n_in, input int n_out);
    for (int i = 0; i < n_in; i++) begin
      gstub_t g;
      g.layer = layer_t'(irand(0, N_LAYERS - 1));
      g.phi   = gphi_t'(int'(sector_lo(0) + urand(0.15, 0.85) * 65536.0 / N_SECTORS));
      g.z     = z_t'(irand(-900, 900));
      e.stubs.push_back(g);
    end
    for (int i = 0; i < n_out; i++) begin
      gstub_t g;
      g.layer = layer_t'(irand(0, N_LAYERS - 1));
      g.phi   = gphi_t'(int'(sector_lo(irand(3, 6)) + urand(0.0, 1.0) * 65536.0 / N_SECTORS));
      g.z     = z_t'(irand(-900, 900));
      e.stubs.push_back(g);
    end
    e.n_outside += n_out;
  endfunction

  function automatic void shuffle_stubs(ref event_t e);
    for (int i = e.stubs.size() - 1; i > 0; i--) begin
      int j = irand(0, i);
      gstub_t t = e.stubs[i];
      e.stubs[i] = e.stubs[j];
      e.stubs[j] = t;
    end
  endfunction

  // ------------------------------------------------------------ driver
  int stall_cycles = 0;
  initial begin
    in_valid = 1'b0; in_stub = '0; in_last = 1'b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    wait (events.size() > 0 && events[$].stubs.size() > 0);
    @(negedge clk);
    foreach (events[k]) begin
      foreach (events[k].stubs[i]) begin
        in_valid = 1'b1;
        in_stub  = events[k].stubs[i];
        in_last  = (i == events[k].stubs.size() - 1);
        @(posedge clk);
        while (!in_ready) begin
          stall_cycles++;
          @(posedge clk);
        end
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    in_last  = 1'b0;
  end

  // ------------------------------------------------------------ monitor
  fit_track_t fits [$];
  int         ev_idx = 0;
  evt_stats_t tot;
  int         n_found = 0, n_truth = 0, n_fake = 0;
  longint     max_cycles = 0;

  always @(posedge clk) if (rst_n && out_valid) fits.push_back(out_fit);

  task automatic check_event(event_t e, evt_stats_t st);
    chk(int'(st.stubs_in) == e.stubs.size(), $sformatf("event %0d: stubs_in %0d", ev_idx, st.stubs_in));
    chk(int'(st.hg_rejected) == e.n_outside, $sformatf("event %0d: hg_rejected %0d expected %0d",
        ev_idx, st.hg_rejected, e.n_outside));
    chk(int'(st.vm_routed) + int'(st.vm_dropped) == e.stubs.size() - e.n_outside, "routed + dropped");
    chk(int'(st.fitted) == fits.size(), "fitted count");
    chk(int'(st.pairs) == int'(st.rej_pt) + int'(st.rej_z0) + int'(st.tracklets),
        "pairs = rejected + tracklets");
    if (e.check_tracks) begin
      // each truth track crosses all three seeding layer pairs
      chk(int'(st.tracklets) >= N_SEED * e.truth.size() && int'(st.merged) >= (N_SEED - 1) * e.truth.size(),
          $sformatf("event %0d: %0d tracklets, %0d merged for %0d tracks", ev_idx, st.tracklets, st.merged,
                    e.truth.size()));
      foreach (e.truth[t]) begin
        int hits = 0;
        foreach (fits[f]) begin
          // loose enough to allow one noise stub picked up in place of a true one
          if (absr(q16(fits[f].par.a_phi) - a_phi_of(e.truth[t], 0)) < 8.0 &&
              absr(q16(fits[f].par.b_phi) - b_phi_of(e.truth[t])) < 8.0 &&
              absr(q16(fits[f].par.a_z) - a_z_of(e.truth[t])) < 10.0 &&
              absr(q16(fits[f].par.b_z) - b_z_of(e.truth[t])) < 20.0) begin
            hits++;
            chk(fits[f].mask == '1, "found track has all six stubs");
          end
        end
        chk(hits == 1, $sformatf("event %0d track %0d found %0d times", ev_idx, t, hits));
        if (hits != 1) begin
          $display("  truth a_phi %f b_phi %f a_z %f b_z %f", a_phi_of(e.truth[t], 0), b_phi_of(e.truth[t]),
                   a_z_of(e.truth[t]), b_z_of(e.truth[t]));
          foreach (fits[f]) $display("  fit %f %f %f %f mask %b", q16(fits[f].par.a_phi), q16(fits[f].par.b_phi),
                                     q16(fits[f].par.a_z), q16(fits[f].par.b_z), fits[f].mask);
        end
        n_truth++;
        if (hits > 0) n_found++;
      end
      n_fake += fits.size() - e.truth.size();
    end
  endtask

  always @(posedge clk) if (rst_n && evt_done) begin
    #1;
    check_event(events[ev_idx], stats);
    $display("event %0d: %0d stubs, %0d pairs, %0d tracklets, %0d candidates, %0d merged, %0d fitted, %0d clocks",
             ev_idx, stats.stubs_in, stats.pairs, stats.tracklets, stats.candidates, stats.merged,
             stats.fitted, stats.cycles);
    if (longint'(stats.cycles) > max_cycles) max_cycles = stats.cycles;
    tot.hg_rejected  += stats.hg_rejected;
    tot.vm_dropped   += stats.vm_dropped;
    tot.rej_pt       += stats.rej_pt;
    tot.rej_z0       += stats.rej_z0;
    tot.tl_overflow  += stats.tl_overflow;
    tot.proj_invalid += stats.proj_invalid;
    tot.proj_hit     += stats.proj_hit;
    tot.proj_miss    += stats.proj_miss;
    tot.rej_few      += stats.rej_few;
    tot.merged       += stats.merged;
    tot.dr_overflow  += stats.dr_overflow;
    fits.delete();
    ev_idx++;
  end

  // ------------------------------------------------------------ stimulus
  localparam int N_NORMAL = 10;

  initial begin
    tot = '0;
    // ordinary events
    for (int k = 0; k < N_NORMAL; k++) begin
      automatic event_t e;
      e.n_outside = 0;
      e.check_tracks = 1;
      for (int t = 0; t < 2 + k; t++) begin
        automatic trk_truth_t tr = random_track(0);
        e.truth.push_back(tr);
        add_track(e, tr);
      end
      add_noise(e, 10 + 3 * k, 8);
      shuffle_stubs(e);
      events.push_back(e);
    end
    // bin overflow, low-pT track, steep track
    begin
      automatic event_t e;
      automatic trk_truth_t tr;
      e.n_outside = 0;
      e.check_tracks = 0;
      for (int i = 0; i < BIN_DEPTH + 4; i++)
        e.stubs.push_back('{layer: 3'd1, phi: gphi_t'(int'(sector_lo(0)) + 3000 + i), z: 12'sd10});
      tr = random_track(0);
      tr.rinv = 2.5 * RINV_2GEV;       // crosses R* mid-sector, so no stub leaves it
      tr.phi0 = (sector_lo(0) + 0.5 * 65536.0 / N_SECTORS) * PHI_LSB + real'(R_STAR_MM) * tr.rinv / 2.0;
      add_track(e, tr);
      tr = random_track(0);
      tr.z0 = 60.0;
      tr.t  = 0.97;
      add_track(e, tr);
      add_noise(e, 10, 4);
      events.push_back(e);
    end
    // overload: more tracklets and distinct candidates than the stores hold
    begin
      automatic event_t e;
      e.n_outside = 0;
      e.check_tracks = 0;
      for (int t = 0; t < 40; t++) add_track(e, random_track(0));
      shuffle_stubs(e);
      events.push_back(e);
    end
    wait (ev_idx == events.size());
    repeat (5) @(posedge clk);
    $display("tracks found %0d of %0d, extra tracks %0d, input stall clocks %0d, longest event %0d clocks",
             n_found, n_truth, n_fake, stall_cycles, max_cycles);
    $display("mechanisms: hg_rejected %0d vm_dropped %0d rej_pt %0d rej_z0 %0d tl_overflow %0d proj_invalid %0d",
             tot.hg_rejected, tot.vm_dropped, tot.rej_pt, tot.rej_z0, tot.tl_overflow, tot.proj_invalid);
    $display("            proj_hit %0d proj_miss %0d rej_few %0d merged %0d dr_overflow %0d",
             tot.proj_hit, tot.proj_miss, tot.rej_few, tot.merged, tot.dr_overflow);
    chk(tot.hg_rejected > 0,  "hourglass rejection never happened");
    chk(tot.vm_dropped > 0,   "VM bin overflow never happened");
    chk(tot.rej_pt > 0,       "pT cut never applied");
    chk(tot.rej_z0 > 0,       "z0 cut never applied");
    chk(tot.tl_overflow > 0,  "tracklet buffer never overflowed");
    chk(tot.proj_invalid > 0, "no projection left the acceptance");
    chk(tot.proj_hit > 0,     "no projection matched");
    chk(tot.proj_miss > 0,    "no projection missed");
    chk(tot.rej_few > 0,      "no tracklet rejected for too few matches");
    chk(tot.merged > 0,       "no duplicate merged");
    chk(tot.dr_overflow > 0,  "duplicate store never overflowed");
    chk(stall_cycles > 0,     "input never stalled");
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
