// l1tf_sector_top -- one hourglass-sector processor of the L1 track finder.
//
// One instance of this module runs the whole track-finding chain for one of
// the nine phi sectors; with time multiplexing by 18, each instance sees one
// event in 18.  Per event it runs, in order:
//   ROUTE  hourglass_filter keeps the sector's stubs (local phi), vm_router
//          sorts them into the vm_stub_memory by layer, VM and z bin;
//   PAIR   for each seeding layer pair (L1L2, L3L4, L5L6) stub_pair_finder
//          forms candidate pairs over the connected VM/z-bin pairs and
//          tracklet_calc turns those that pass pT > 2 GeV and |z0| <= 150 mm
//          into tracklets, stored in a list_buffer;
//   MATCH  projection_matcher matches each tracklet's four projections to
//          stubs and hands candidates with at least two matches to
//          duplicate_removal, which merges candidates sharing four stubs;
//   FIT    the surviving candidates stream through kalman_fitter to out_fit.
// The memories are cleared and evt_done pulses (with the event's counters in
// stats) one clock after the last fitted track.
//
// Interface: in_valid/in_ready/in_stub/in_last carry the stubs of one event
// (in_last on the final stub; an event has at least one stub).  in_ready is
// high only while the processor is collecting an event, so the next event
// waits until the current one is finished.  out_valid/out_fit: one fitted
// track per pulse, no back-pressure.
// Timing: stubs at one per clock; the later steps are sequential, so the
// time per event grows with the number of stubs, pairs and tracklets
// (stats.cycles reports it).
// From the description: the order of the steps, one independent instance per
// sector, the numbers listed in l1tf_pkg.  Own choices: running the steps one
// after another on one event at a time, with one instance of each step
// shared by the three seeds.
module l1tf_sector_top
  import l1tf_pkg::*;
#(
  parameter int SECTOR  = 0,
  parameter int N_VM    = 16,
  parameter int MAX_TL  = 64,
  parameter int MAX_TRK = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  gstub_t     in_stub,
  input  logic       in_last,
  output logic       out_valid,
  output fit_track_t out_fit,
  output logic       evt_done,
  output evt_stats_t stats
);

  localparam int TLW = $clog2(MAX_TL);

  typedef enum logic [3:0] {
    P_ROUTE, P_ROUTE_DRAIN, P_PAIR_START, P_PAIR_WAIT, P_PAIR_DRAIN,
    P_MATCH_START, P_MATCH_WAIT, P_FLUSH, P_FIT, P_END
  } phase_t;
  phase_t phase;

  logic clear;
  assign clear = (phase == P_END);

  // ------------------------------------------------------------ ROUTE
  logic   hg_valid, hg_reject;
  stub_t  hg_stub;
  logic   acc;
  assign in_ready = (phase == P_ROUTE);
  assign acc      = in_valid && in_ready;

  hourglass_filter #(.SECTOR(SECTOR)) u_hg (
    .clk, .rst_n, .in_valid(acc), .in_stub,
    .out_valid(hg_valid), .out_stub(hg_stub), .out_reject(hg_reject)
  );

  logic        vr_wr_en, vr_wr_full;
  stub_id_t    vr_wr_bin;
  stub_t       vr_wr_stub;
  slot_t       vr_wr_slot;
  logic [15:0] vr_routed, vr_dropped;

  vm_router #(.N_VM(N_VM)) u_vr (
    .clk, .rst_n, .clear, .in_valid(hg_valid), .in_stub(hg_stub),
    .wr_en(vr_wr_en), .wr_bin(vr_wr_bin), .wr_stub(vr_wr_stub), .wr_full(vr_wr_full),
    .n_routed(vr_routed), .n_dropped(vr_dropped)
  );

  stub_id_t ra_addr, rb_addr;
  stub_t    ra_stub, rb_stub;
  cnt_t     ra_count, rb_count;
  cnt_t     counts [N_LAYERS][N_VM][N_ZBIN];

  vm_stub_memory #(.N_VM(N_VM)) u_mem (
    .clk, .rst_n, .clear,
    .wr_en(vr_wr_en), .wr_bin(vr_wr_bin), .wr_stub(vr_wr_stub),
    .wr_full(vr_wr_full), .wr_slot(vr_wr_slot),
    .ra_addr, .ra_stub, .ra_count,
    .rb_addr, .rb_stub, .rb_count,
    .counts
  );

  // ------------------------------------------------------------ PAIR
  logic        pf_start, pf_busy, pf_done, pf_valid;
  seed_t       seed_idx, pf_seed;
  layer_stub_t pf_in, pf_out;
  stub_id_t    pf_rb_addr;

  stub_pair_finder #(.N_VM(N_VM)) u_pf (
    .clk, .rst_n, .start(pf_start), .seed(seed_idx), .busy(pf_busy), .done(pf_done),
    .counts, .ra_addr, .ra_stub, .rb_addr(pf_rb_addr), .rb_stub,
    .pair_valid(pf_valid), .pair_seed(pf_seed), .pair_in(pf_in), .pair_out(pf_out)
  );

  logic      tc_valid, tc_rej_pt, tc_rej_z0;
  tracklet_t tc_tl;

  tracklet_calc u_tc (
    .clk, .rst_n, .in_valid(pf_valid), .in_seed(pf_seed), .in_inner(pf_in), .in_outer(pf_out),
    .out_valid(tc_valid), .out_tl(tc_tl), .rej_pt(tc_rej_pt), .rej_z0(tc_rej_z0)
  );

  logic [TLW-1:0] tl_idx;
  tracklet_t      tl_rd;
  logic [TLW:0]   tl_count;
  logic [15:0]    tl_ovf;

  list_buffer #(.T(tracklet_t), .DEPTH(MAX_TL)) u_tlbuf (
    .clk, .rst_n, .clear, .wr_en(tc_valid), .wr_data(tc_tl),
    .rd_idx(tl_idx), .rd_data(tl_rd), .count(tl_count), .n_overflow(tl_ovf)
  );

  // ------------------------------------------------------------ MATCH
  logic      pm_start, pm_busy, pm_done, pm_valid, pm_rej_few, pm_hit, pm_miss;
  track_t    pm_trk;
  stub_id_t  pm_rd_addr;

  projection_matcher #(.N_VM(N_VM)) u_pm (
    .clk, .rst_n, .start(pm_start), .tl(tl_rd), .busy(pm_busy), .done(pm_done),
    .rd_addr(pm_rd_addr), .rd_stub(rb_stub), .rd_count(rb_count),
    .out_valid(pm_valid), .out_trk(pm_trk), .rej_few(pm_rej_few),
    .proj_hit(pm_hit), .proj_miss(pm_miss)
  );

  assign rb_addr = (phase == P_MATCH_START || phase == P_MATCH_WAIT) ? pm_rd_addr : pf_rb_addr;

  logic                       dr_flush, dr_valid, dr_ready, dr_done;
  track_t                     dr_trk;
  logic [$clog2(MAX_TRK):0]   dr_kept;
  logic [15:0]                dr_merged, dr_ovf;

  duplicate_removal #(.MAX_TRK(MAX_TRK)) u_dr (
    .clk, .rst_n, .clear, .in_valid(pm_valid), .in_trk(pm_trk),
    .flush(dr_flush), .out_valid(dr_valid), .out_ready(dr_ready), .out_trk(dr_trk),
    .done(dr_done), .n_kept(dr_kept), .n_merged(dr_merged), .n_overflow(dr_ovf)
  );

  // ------------------------------------------------------------ FIT
  kalman_fitter u_kf (
    .clk, .rst_n, .in_valid(dr_valid), .in_ready(dr_ready), .in_trk(dr_trk),
    .out_valid, .out_fit
  );

  // ------------------------------------------------------------ sequencing
  logic [1:0] drain;
  logic       dr_finished;

  assign pf_start = (phase == P_PAIR_START);
  assign pm_start = (phase == P_MATCH_START);
  assign dr_flush = (phase == P_FLUSH);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase       <= P_ROUTE;
      seed_idx    <= '0;
      tl_idx      <= '0;
      drain       <= '0;
      dr_finished <= 1'b0;
    end else begin
      unique case (phase)
        P_ROUTE: if (acc && in_last) begin
          drain <= 2'd2;
          phase <= P_ROUTE_DRAIN;
        end
        P_ROUTE_DRAIN: begin            // hourglass + router registers
          if (drain == 0) begin
            seed_idx <= '0;
            phase    <= P_PAIR_START;
          end
          drain <= drain - 1'b1;
        end
        P_PAIR_START: phase <= P_PAIR_WAIT;
        P_PAIR_WAIT: if (pf_done) begin
          drain <= 2'd2;
          phase <= P_PAIR_DRAIN;
        end
        P_PAIR_DRAIN: begin             // pair register + tracklet_calc register
          if (drain == 0) begin
            if (seed_idx == seed_t'(N_SEED - 1)) begin
              tl_idx <= '0;
              phase  <= (tl_count == 0) ? P_FLUSH : P_MATCH_START;
            end else begin
              seed_idx <= seed_idx + 1'b1;
              phase    <= P_PAIR_START;
            end
          end
          drain <= drain - 1'b1;
        end
        P_MATCH_START: phase <= P_MATCH_WAIT;
        P_MATCH_WAIT: if (pm_done) begin
          if ((TLW+1)'(tl_idx) + 1'b1 >= tl_count) begin
            phase <= P_FLUSH;
          end else begin
            tl_idx <= tl_idx + 1'b1;
            phase  <= P_MATCH_START;
          end
        end
        P_FLUSH: begin
          dr_finished <= 1'b0;
          phase       <= P_FIT;
        end
        P_FIT: begin
          if (dr_done) dr_finished <= 1'b1;
          if ((dr_finished || dr_done) && dr_ready && !dr_valid) phase <= P_END;
        end
        P_END: phase <= P_ROUTE;
        default: phase <= P_ROUTE;
      endcase
    end
  end

  // ------------------------------------------------------------ counters
  evt_stats_t cnt;
  logic       counting;
  logic [2:0] n_inv;

  always_comb begin
    n_inv = '0;
    for (int p = 0; p < N_PROJ; p++) n_inv += {2'b0, ~tc_tl.proj[p].valid};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt      <= '0;
      counting <= 1'b0;
      stats    <= '0;
      evt_done <= 1'b0;
    end else begin
      evt_done <= 1'b0;
      if (phase == P_END) begin
        stats             <= cnt;
        stats.vm_routed   <= vr_routed;
        stats.vm_dropped  <= vr_dropped;
        stats.tl_overflow <= tl_ovf;
        stats.merged      <= dr_merged;
        stats.dr_overflow <= dr_ovf;
        stats.cycles      <= cnt.cycles + 1;
        evt_done          <= 1'b1;
        cnt               <= '0;
        counting          <= 1'b0;
      end else begin
        if (acc) counting <= 1'b1;
        if (acc || counting) cnt.cycles <= cnt.cycles + 1;
        if (acc)         cnt.stubs_in     <= cnt.stubs_in + 1'b1;
        if (hg_reject)   cnt.hg_rejected  <= cnt.hg_rejected + 1'b1;
        if (pf_valid)    cnt.pairs        <= cnt.pairs + 1'b1;
        if (tc_rej_pt)   cnt.rej_pt       <= cnt.rej_pt + 1'b1;
        if (tc_rej_z0)   cnt.rej_z0       <= cnt.rej_z0 + 1'b1;
        if (tc_valid)    cnt.tracklets    <= cnt.tracklets + 1'b1;
        if (tc_valid)    cnt.proj_invalid <= cnt.proj_invalid + 16'(n_inv);
        if (pm_hit)      cnt.proj_hit     <= cnt.proj_hit + 1'b1;
        if (pm_miss)     cnt.proj_miss    <= cnt.proj_miss + 1'b1;
        if (pm_rej_few)  cnt.rej_few      <= cnt.rej_few + 1'b1;
        if (pm_valid)    cnt.candidates   <= cnt.candidates + 1'b1;
        if (out_valid)   cnt.fitted       <= cnt.fitted + 1'b1;
      end
    end
  end

endmodule
