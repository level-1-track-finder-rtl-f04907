// duplicate_removal -- merges track candidates that describe the same particle.
//
// A particle is usually found several times: once per seeding layer pair that
// it crosses, and sometimes twice from one seed when a layer holds two close
// stubs.  Every incoming candidate is compared, in parallel, with all
// candidates already kept for the event.  If it shares at least MERGE_SHARED
// (four) stubs with one of them (same stub in the same layer), it is merged
// into the first such one: layers where the kept candidate has no stub take
// the newcomer's stub, and the kept candidate's parameters and seed stay.
// Otherwise it is appended.  After flush the kept candidates leave one by one
// on a valid/ready stream, and done pulses after the last.
//
// Interface: in_valid/in_trk (one per clock, no back-pressure; a candidate
// that finds the store full is dropped and counted), flush, out_valid/
// out_ready/out_trk, done, n_kept, n_merged, n_overflow; clear between events.
// Timing: a candidate is compared and stored in the clock it arrives.
// From the description: duplicates are removed before the fit by merging
// tracks that share at least four stubs.  Own choices: store size, first-match
// priority, keeping the first candidate's parameters.
module duplicate_removal
  import l1tf_pkg::*;
#(
  parameter int MAX_TRK = 32,
  localparam int AW = $clog2(MAX_TRK)
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  track_t      in_trk,
  input  logic        flush,
  output logic        out_valid,
  input  logic        out_ready,
  output track_t      out_trk,
  output logic        done,
  output logic [AW:0] n_kept,
  output logic [15:0] n_merged,
  output logic [15:0] n_overflow
);

  track_t     kept [MAX_TRK];
  logic       sending;
  logic [AW:0] rd;

  // number of stubs two candidates share
  function automatic int shared(track_t a, track_t b);
    int n = 0;
    for (int l = 0; l < N_LAYERS; l++)
      if (a.st[l].valid && b.st[l].valid && a.st[l].id == b.st[l].id) n++;
    return n;
  endfunction

  logic          hit;
  logic [AW-1:0] hit_idx;
  always_comb begin
    hit     = 1'b0;
    hit_idx = '0;
    for (int k = MAX_TRK - 1; k >= 0; k--) begin
      if ((AW+1)'(k) < n_kept && shared(kept[k], in_trk) >= MERGE_SHARED) begin
        hit     = 1'b1;
        hit_idx = AW'(k);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_kept     <= '0;
      n_merged   <= '0;
      n_overflow <= '0;
      sending    <= 1'b0;
      rd         <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      if (clear) begin
        n_kept     <= '0;
        n_merged   <= '0;
        n_overflow <= '0;
        sending    <= 1'b0;
        rd         <= '0;
      end else begin
        if (in_valid && !sending) begin
          if (hit) begin
            n_merged <= n_merged + 16'd1;
            for (int l = 0; l < N_LAYERS; l++)
              if (!kept[hit_idx].st[l].valid && in_trk.st[l].valid)
                kept[hit_idx].st[l] <= in_trk.st[l];
          end else if (n_kept == (AW+1)'(MAX_TRK)) begin
            n_overflow <= n_overflow + 16'd1;
          end else begin
            kept[n_kept[AW-1:0]] <= in_trk;
            n_kept <= n_kept + 1'b1;
          end
        end
        if (flush && !sending) begin
          sending <= 1'b1;
          rd      <= '0;
        end
        if (sending) begin
          if (rd == n_kept) begin
            sending <= 1'b0;
            done    <= 1'b1;
          end else if (out_ready) begin
            rd <= rd + 1'b1;
          end
        end
      end
    end
  end

  assign out_valid = sending && (rd != n_kept);
  assign out_trk   = kept[rd[AW-1:0]];

endmodule
