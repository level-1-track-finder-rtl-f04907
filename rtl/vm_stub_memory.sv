// vm_stub_memory -- stub memory of one event, binned by layer, phi virtual
// module (VM) and z bin.
//
// Every (layer, VM, z bin) owns BIN_DEPTH slots and a fill counter.  A write
// appends to its bin; a write to a full bin is refused (wr_full is high in
// the same cycle, so the writer can count the dropped stub).  Two independent
// read ports (A, B) return, combinationally, the stub in a given slot and the
// fill count of the addressed bin.  The fill counts of all bins are also
// exported so that the consumers can skip empty bins.  clear empties every
// bin in one clock, between events.
//
// From the description: the VM segmentation and the use of memories between
// processing steps.  Own choices: BIN_DEPTH, asynchronous reads, one write
// port and two read ports.
module vm_stub_memory
  import l1tf_pkg::*;
#(
  parameter int N_VM = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     clear,
  // write port
  input  logic     wr_en,
  input  stub_id_t wr_bin,   // slot field ignored
  input  stub_t    wr_stub,
  output logic     wr_full,
  output slot_t    wr_slot,
  // read port A
  input  stub_id_t ra_addr,
  output stub_t    ra_stub,
  output cnt_t     ra_count,
  // read port B
  input  stub_id_t rb_addr,
  output stub_t    rb_stub,
  output cnt_t     rb_count,
  // all fill counts
  output cnt_t     counts [N_LAYERS][N_VM][N_ZBIN]
);

  stub_t mem [N_LAYERS][N_VM][N_ZBIN][BIN_DEPTH];
  cnt_t  cnt [N_LAYERS][N_VM][N_ZBIN];

  cnt_t  wr_cnt;
  assign wr_cnt  = cnt[wr_bin.layer][wr_bin.vm][wr_bin.zb];
  assign wr_full = (wr_cnt == cnt_t'(BIN_DEPTH));
  assign wr_slot = slot_t'(wr_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= '{default: '0};
    end else if (clear) begin
      cnt <= '{default: '0};
    end else if (wr_en && !wr_full) begin
      cnt[wr_bin.layer][wr_bin.vm][wr_bin.zb] <= wr_cnt + cnt_t'(1);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !wr_full && !clear)
      mem[wr_bin.layer][wr_bin.vm][wr_bin.zb][wr_slot] <= wr_stub;
  end

  assign ra_stub  = mem[ra_addr.layer][ra_addr.vm][ra_addr.zb][ra_addr.slot];
  assign ra_count = cnt[ra_addr.layer][ra_addr.vm][ra_addr.zb];
  assign rb_stub  = mem[rb_addr.layer][rb_addr.vm][rb_addr.zb][rb_addr.slot];
  assign rb_count = cnt[rb_addr.layer][rb_addr.vm][rb_addr.zb];
  assign counts   = cnt;

  // The address fields must stay inside the memory.
  always_ff @(posedge clk) begin
    if (rst_n && wr_en && !clear)
      assert (int'(wr_bin.layer) < N_LAYERS && int'(wr_bin.vm) < N_VM)
        else $error("vm_stub_memory: write outside the memory");
  end

endmodule
