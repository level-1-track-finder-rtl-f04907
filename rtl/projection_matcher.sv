// projection_matcher -- adds stubs in the other layers to a tracklet.
//
// For each of the four projections of a tracklet the matcher reads the VM
// stub memory in the bins that a residual window around the projection
// touches (PHI_CUT in phi, Z_CUT_MM in z; at most two VMs by two z bins with
// the default bin sizes), computes the residuals of every stub there, and
// keeps the stub with the smallest |phi residual| inside the window.  A
// tracklet with at least MIN_MATCH matched layers becomes a track candidate
// (seed stubs, matched stubs and the tracklet's parameters); otherwise it is
// dropped (rej_few).
//
// Interface: start with tl (held by the matcher), busy until done pulses.
// One memory read port (rd_addr -> rd_stub, rd_count).  out_valid/out_trk
// pulse together with done for an accepted track.  proj_hit/proj_miss pulse
// once per valid projection.
// Timing: one clock per projection set-up, one per stub slot examined (an
// empty bin costs one clock), one to finish.
// From the description: projections are used to calculate residuals and match
// stubs in additional layers.  Own choices: window sizes, best-phi-residual
// selection, the two-match requirement.
module projection_matcher
  import l1tf_pkg::*;
#(
  parameter int N_VM = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  tracklet_t tl,
  output logic      busy,
  output logic      done,
  // VM memory read port
  output stub_id_t  rd_addr,
  input  stub_t     rd_stub,
  input  cnt_t      rd_count,
  // result
  output logic      out_valid,
  output track_t    out_trk,
  output logic      rej_few,
  output logic      proj_hit,
  output logic      proj_miss
);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_SCAN, S_FINISH} state_t;
  state_t state;

  tracklet_t   t;
  track_t      trk;
  logic [2:0]  p;
  logic [2:0]  nmatch;
  vm_t         cv, vhi;
  zb_t         cz, zlo, zhi;
  slot_t       slot;
  logic        best_v;
  logic [15:0] best_res;
  layer_stub_t best;

  proj_t  pj;
  assign pj = t.proj[p[1:0]];

  // window bins of the current projection
  vm_t win_vlo, win_vhi;
  zb_t win_zlo, win_zhi;
  always_comb begin
    logic signed [PHI_W+1:0] lo, hi;
    lo = $signed({2'b0, pj.phi}) - (PHI_W+2)'(PHI_CUT);
    hi = $signed({2'b0, pj.phi}) + (PHI_W+2)'(PHI_CUT);
    if (lo < 0) lo = '0;
    if (hi > PHI_SPAN - 1) hi = (PHI_W+2)'(PHI_SPAN - 1);
    win_vlo = vm_of(lo[PHI_W:0], N_VM);
    win_vhi = vm_of(hi[PHI_W:0], N_VM);
    win_zlo = zb_of((Z_W+2)'(pj.z) - (Z_W+2)'(Z_CUT_MM));
    win_zhi = zb_of((Z_W+2)'(pj.z) + (Z_W+2)'(Z_CUT_MM));
  end

  assign rd_addr = '{layer: pj.layer, vm: cv, zb: cz, slot: slot};

  // residuals of the stub being read
  logic signed [PHI_W+1:0] dphi;
  logic signed [Z_W+1:0]   dz;
  logic [15:0]             adphi;
  logic                    in_win, cand_v, last_slot, last_bin;
  layer_stub_t             cand;
  logic [15:0]             cand_res;
  always_comb begin
    dphi   = $signed({2'b0, rd_stub.phi}) - $signed({2'b0, pj.phi});
    dz     = (Z_W+2)'(rd_stub.z) - (Z_W+2)'(pj.z);
    adphi  = 16'(dphi < 0 ? -dphi : dphi);
    in_win = (cnt_t'(slot) < rd_count) &&
             (adphi <= 16'(PHI_CUT)) && ((dz < 0 ? -dz : dz) <= (Z_W+2)'(Z_CUT_MM));
    cand_v   = best_v;
    cand     = best;
    cand_res = best_res;
    if (in_win && (!best_v || adphi < best_res)) begin
      cand_v   = 1'b1;
      cand     = '{valid: 1'b1, id: rd_addr, phi: rd_stub.phi, z: rd_stub.z};
      cand_res = adphi;
    end
    last_slot = (cnt_t'(slot) + 1'b1 >= rd_count);
    last_bin  = (cz == zhi) && (cv == vhi);
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      t         <= '0;
      trk       <= '0;
      p         <= '0;
      nmatch    <= '0;
      cv        <= '0;
      vhi       <= '0;
      cz        <= '0;
      zlo       <= '0;
      zhi       <= '0;
      slot      <= '0;
      best_v    <= 1'b0;
      best_res  <= '0;
      best      <= '0;
      done      <= 1'b0;
      out_valid <= 1'b0;
      out_trk   <= '0;
      rej_few   <= 1'b0;
      proj_hit  <= 1'b0;
      proj_miss <= 1'b0;
    end else begin
      done      <= 1'b0;
      out_valid <= 1'b0;
      rej_few   <= 1'b0;
      proj_hit  <= 1'b0;
      proj_miss <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          t      <= tl;
          trk    <= tl.trk;
          p      <= '0;
          nmatch <= '0;
          state  <= S_SETUP;
        end
        S_SETUP: begin
          if (p == 3'(N_PROJ)) begin
            state <= S_FINISH;
          end else if (!pj.valid) begin
            p <= p + 1'b1;
          end else begin
            cv     <= win_vlo;
            vhi    <= win_vhi;
            cz     <= win_zlo;
            zlo    <= win_zlo;
            zhi    <= win_zhi;
            slot   <= '0;
            best_v <= 1'b0;
            state  <= S_SCAN;
          end
        end
        S_SCAN: begin
          best_v   <= cand_v;
          best     <= cand;
          best_res <= cand_res;
          if (!last_slot) begin
            slot <= slot + 1'b1;
          end else if (!last_bin) begin
            slot <= '0;
            if (cz != zhi) cz <= cz + 1'b1;
            else begin
              cz <= zlo;
              cv <= cv + 1'b1;
            end
          end else begin
            if (cand_v) begin
              trk.st[pj.layer] <= cand;
              nmatch           <= nmatch + 1'b1;
            end
            proj_hit  <= cand_v;
            proj_miss <= !cand_v;
            p         <= p + 1'b1;
            state     <= S_SETUP;
          end
        end
        S_FINISH: begin
          done      <= 1'b1;
          out_valid <= (nmatch >= 3'(MIN_MATCH));
          rej_few   <= (nmatch <  3'(MIN_MATCH));
          out_trk   <= trk;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
