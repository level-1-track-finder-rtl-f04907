// tb_stub_pair_finder -- fills a VM stub memory with stubs of random tracks
// plus random stubs, runs stub_pair_finder for seeds 0 and 1, and checks:
//   * every pair is unique, lies in the seed's layers and carries the stored
//     stub data;
//   * completeness: every stub pair that a pT > 2 GeV track from |z0| < 145 mm
//     could form (worked out here from the stub coordinates) is emitted;
//   * no pair is emitted whose phi difference exceeds the pT = 2 GeV bend by
//     more than two VM widths;
//   * the pass takes no more clocks than pairs + inner stubs + occupied inner
//     bins + 4.
module tb_stub_pair_finder;
  import l1tf_pkg::*;
  import l1tf_tb_pkg::*;

  localparam int NVM = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        clear = 1'b0, wr_en, wr_full;
  stub_id_t    wr_bin, ra_addr, rb_addr;
  stub_t       wr_stub, ra_stub, rb_stub;
  slot_t       wr_slot;
  cnt_t        ra_count, rb_count;
  cnt_t        counts [N_LAYERS][NVM][N_ZBIN];

  vm_stub_memory #(.N_VM(NVM)) mem (.*);

  logic        start, busy, done, pair_valid;
  seed_t       seed, pair_seed;
  layer_stub_t pair_in, pair_out;

  stub_pair_finder #(.N_VM(NVM)) dut (.clk, .rst_n, .start, .seed, .busy, .done,
    .counts, .ra_addr, .ra_stub, .rb_addr, .rb_stub,
    .pair_valid, .pair_seed, .pair_in, .pair_out);

  // model of what was stored
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

  // physics test of a pair: bend within the 2 GeV limit and z0 within limit
  function automatic bit physical(stub_t a, stub_t b, real margin_phi, real z0lim);
    real dr, dphi, z0;
    dr   = radius(int'(b.layer)) - radius(int'(a.layer));
    dphi = real'(b.phi) - real'(a.phi);
    z0   = real'(a.z) - (real'(b.z) - real'(a.z)) / dr * radius(int'(a.layer));
    return absr(dphi) <= RINV_2GEV / 2.0 / PHI_LSB * dr - margin_phi && absr(z0) <= z0lim;
  endfunction

  task automatic run_seed(int s);
    int npairs = 0, cycles = 0, n_inner = 0, n_ibins = 0, n_expect = 0;
    bit seen [string];
    stored_t inner [$], outer [$];
    foreach (stored[i]) begin
      if (int'(stored[i].id.layer) == 2*s)     inner.push_back(stored[i]);
      if (int'(stored[i].id.layer) == 2*s + 1) outer.push_back(stored[i]);
    end
    n_inner = inner.size();
    for (int v = 0; v < NVM; v++)
      for (int z = 0; z < N_ZBIN; z++)
        if (counts[2*s][v][z] != 0) n_ibins++;
    @(negedge clk);
    start = 1'b1;
    seed  = seed_t'(s);
    @(negedge clk);
    start = 1'b0;
    while (!done) begin
      @(posedge clk);
      #1;
      cycles++;
      if (pair_valid) begin
        string key;
        bit found_i = 0, found_o = 0;
        npairs++;
        key = $sformatf("%0h_%0h", pair_in.id, pair_out.id);
        chk(!seen.exists(key), "duplicate pair");
        seen[key] = 1;
        chk(int'(pair_in.id.layer) == 2*s && int'(pair_out.id.layer) == 2*s + 1 &&
            int'(pair_seed) == s, "pair layers");
        foreach (inner[i]) if (inner[i].id == pair_in.id)
          found_i = (inner[i].s.phi == pair_in.phi && inner[i].s.z == pair_in.z);
        foreach (outer[i]) if (outer[i].id == pair_out.id)
          found_o = (outer[i].s.phi == pair_out.phi && outer[i].s.z == pair_out.z);
        chk(found_i && found_o, "pair data matches stored stubs");
        chk(absr(real'(pair_out.phi) - real'(pair_in.phi)) <=
            RINV_2GEV / 2.0 / PHI_LSB * (radius(2*s+1) - radius(2*s)) + 2.0 * PHI_SPAN / NVM,
            "pair far outside the pT window");
      end
    end
    // one more clock: the last pair leaves one clock after its read
    @(posedge clk);
    #1;
    if (pair_valid) begin
      npairs++;
      seen[$sformatf("%0h_%0h", pair_in.id, pair_out.id)] = 1;
    end
    foreach (inner[i])
      foreach (outer[j])
        if (physical(inner[i].s, outer[j].s, 1.0, 145.0)) begin
          n_expect++;
          chk(seen.exists($sformatf("%0h_%0h", inner[i].id, outer[j].id)), "physical pair missing");
        end
    chk(n_expect > 5, "too few physical pairs in the test");
    chk(cycles <= npairs + n_inner + n_ibins + 4,
        $sformatf("seed %0d: %0d clocks for %0d pairs, %0d inner stubs, %0d bins", s, cycles, npairs, n_inner, n_ibins));
    $display("seed %0d: %0d pairs (%0d physical) in %0d clocks", s, npairs, n_expect, cycles);
  endtask

  initial begin
    start = 1'b0; seed = '0; wr_en = 1'b0; wr_bin = '0; wr_stub = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 25; t++) begin
      trk_truth_t tr = random_track(0, 120.0);
      for (int l = 0; l < 4; l++) put(to_local(stub_of(tr, l, irand(-1, 1), irand(-2, 2)), 0));
    end
    for (int i = 0; i < 120; i++)
      put('{layer: layer_t'(irand(0, 3)), phi: phi_t'(irand(0, PHI_SPAN - 1)), z: z_t'(irand(-1000, 1000))});
    run_seed(0);
    run_seed(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
