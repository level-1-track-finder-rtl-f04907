// stub_pair_finder -- seeding step: forms candidate stub pairs in two
// adjacent barrel layers.
//
// Seed s pairs layer 2s (inner) with layer 2s+1 (outer).  Only VM pairs that
// a track with pT above 2 GeV can connect are wired (VM_TAB), and only z-bin
// pairs consistent with a track from |z0| <= 150 mm (Z_TAB).  Both tables are
// worked out at elaboration from the layer radii, so the connection pattern
// is fixed in the logic, as in firmware where unconnected VM pairs simply do
// not exist.  Empty bins are skipped with priority encoders over the fill
// counts of the VM stub memory, so the finder spends one clock per emitted
// pair, plus one per inner stub and one per occupied inner bin.
//
// Interface: start (one clock, with seed) begins a pass over the whole VM
// memory; busy is high until done pulses.  Read port A addresses the inner
// stub, read port B the outer stub.  Every clock at most one candidate pair
// leaves on pair_valid/pair_in/pair_out, registered one clock after its read.
// Candidates are not yet cut on the exact pT and z0: tracklet_calc does that.
// From the description: seeding with stub pairs in adjacent layers, VM pairs
// connected only if consistent with pT > 2 GeV, z-bin combinations consistent
// with the interaction point.  Own choices: the seeding layer pairs (L1L2,
// L3L4, L5L6), the scan order and the slack on the tables.
module stub_pair_finder
  import l1tf_pkg::*;
#(
  parameter int N_VM = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  seed_t       seed,
  output logic        busy,
  output logic        done,
  // VM memory
  input  cnt_t        counts [N_LAYERS][N_VM][N_ZBIN],
  output stub_id_t    ra_addr,
  input  stub_t       ra_stub,
  output stub_id_t    rb_addr,
  input  stub_t       rb_stub,
  // candidate pairs
  output logic        pair_valid,
  output seed_t       pair_seed,
  output layer_stub_t pair_in,
  output layer_stub_t pair_out
);

  localparam int NB  = N_VM * N_ZBIN;     // bins per layer
  localparam int BW  = VM_W + ZB_W;       // bin index {vm, zb}

  typedef logic [MAX_VM*MAX_VM-1:0] vmtab_t;
  typedef logic [N_ZBIN*N_ZBIN-1:0] ztab_t;
  localparam vmtab_t VM_TAB [N_SEED] = '{vm_pair_table(0, N_VM), vm_pair_table(1, N_VM),
                                         vm_pair_table(2, N_VM)};
  localparam ztab_t  Z_TAB  [N_SEED] = '{zbin_pair_table(0), zbin_pair_table(1),
                                         zbin_pair_table(2)};

  typedef enum logic [2:0] {S_IDLE, S_NEXT_IN, S_IN_START, S_OUTER} state_t;
  state_t state;

  seed_t            s;
  logic [BW-1:0]    ib, ob, ib_from;
  slot_t            isl, osl;
  layer_t           li, lo;

  assign li = layer_t'({s, 1'b0});
  assign lo = layer_t'({s, 1'b1});

  // First set bit of m at or above index from.
  function automatic logic [BW:0] first_from(logic [NB-1:0] m, logic [BW:0] from);
    for (int b = 0; b < NB; b++)
      if (m[b] && (BW+1)'(b) >= from) return {1'b1, BW'(b)};
    return '0;
  endfunction

  logic [NB-1:0] in_ne, out_ok;
  always_comb begin
    for (int b = 0; b < NB; b++) begin
      in_ne[b]  = counts[li][b / N_ZBIN][b % N_ZBIN] != '0;
      out_ok[b] = VM_TAB[s][int'(ib[BW-1:ZB_W]) * MAX_VM + b / N_ZBIN] &&
                  Z_TAB[s][int'(ib[ZB_W-1:0]) * N_ZBIN + b % N_ZBIN] &&
                  counts[lo][b / N_ZBIN][b % N_ZBIN] != '0;
    end
  end

  cnt_t in_cnt, out_cnt;
  assign in_cnt  = counts[li][ib[BW-1:ZB_W]][ib[ZB_W-1:0]];
  assign out_cnt = counts[lo][ob[BW-1:ZB_W]][ob[ZB_W-1:0]];

  logic [BW:0] f_in, f_out0, f_outn;
  assign f_in   = first_from(in_ne, {1'b0, ib_from});
  assign f_out0 = first_from(out_ok, '0);
  assign f_outn = first_from(out_ok, (BW+1)'(ob) + 1'b1);

  assign ra_addr = '{layer: li, vm: vm_t'(ib[BW-1:ZB_W]), zb: ib[ZB_W-1:0], slot: isl};
  assign rb_addr = '{layer: lo, vm: vm_t'(ob[BW-1:ZB_W]), zb: ob[ZB_W-1:0], slot: osl};

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      s       <= '0;
      ib      <= '0;
      ob      <= '0;
      ib_from <= '0;
      isl     <= '0;
      osl     <= '0;
      done    <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          s       <= seed;
          ib_from <= '0;
          state   <= S_NEXT_IN;
        end
        S_NEXT_IN: begin
          if (f_in[BW]) begin
            ib    <= f_in[BW-1:0];
            isl   <= '0;
            state <= S_IN_START;
          end else begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        S_IN_START: begin
          if (f_out0[BW]) begin
            ob    <= f_out0[BW-1:0];
            osl   <= '0;
            state <= S_OUTER;
          end else if (cnt_t'(isl) + 1'b1 < in_cnt) begin
            isl   <= isl + 1'b1;
          end else begin
            ib_from <= ib + 1'b1;
            state   <= (ib == BW'(NB - 1)) ? S_IDLE : S_NEXT_IN;
            done    <= (ib == BW'(NB - 1));
          end
        end
        S_OUTER: begin
          if (cnt_t'(osl) + 1'b1 < out_cnt) begin
            osl <= osl + 1'b1;
          end else if (f_outn[BW] && ob != BW'(NB - 1)) begin
            ob  <= f_outn[BW-1:0];
            osl <= '0;
          end else if (cnt_t'(isl) + 1'b1 < in_cnt) begin
            isl   <= isl + 1'b1;
            state <= S_IN_START;
          end else begin
            ib_from <= ib + 1'b1;
            state   <= (ib == BW'(NB - 1)) ? S_IDLE : S_NEXT_IN;
            done    <= (ib == BW'(NB - 1));
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // Registered output of the pair read in S_OUTER.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pair_valid <= 1'b0;
      pair_seed  <= '0;
      pair_in    <= '0;
      pair_out   <= '0;
    end else begin
      pair_valid <= (state == S_OUTER);
      pair_seed  <= s;
      pair_in    <= '{valid: 1'b1, id: ra_addr, phi: ra_stub.phi, z: ra_stub.z};
      pair_out   <= '{valid: 1'b1, id: rb_addr, phi: rb_stub.phi, z: rb_stub.z};
    end
  end

endmodule
