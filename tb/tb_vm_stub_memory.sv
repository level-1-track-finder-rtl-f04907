// tb_vm_stub_memory -- fills random bins of vm_stub_memory past their depth,
// checks wr_full/wr_slot against a model of the fill counts, reads every
// stored stub back through both ports, and checks that clear empties it.
module tb_vm_stub_memory;
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

  vm_stub_memory #(.N_VM(NVM)) dut (.*);

  int    model_cnt [N_LAYERS][NVM][N_ZBIN];
  stub_t model_mem [N_LAYERS][NVM][N_ZBIN][BIN_DEPTH];
  int    n_full = 0;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  initial begin
    clear = 1'b0; wr_en = 1'b0; wr_bin = '0; wr_stub = '0; ra_addr = '0; rb_addr = '0;
    foreach (model_cnt[l, v, z]) model_cnt[l][v][z] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1500; i++) begin
      int l, v, z;
      l = irand(0, N_LAYERS - 1);
      v = irand(0, 3);           // few bins so that many overflow
      z = irand(0, 2);
      @(negedge clk);
      wr_en   = 1'b1;
      wr_bin  = '{layer: layer_t'(l), vm: vm_t'(v), zb: zb_t'(z), slot: '0};
      wr_stub = '{layer: layer_t'(l), phi: phi_t'($urandom), z: z_t'($urandom)};
      #1;
      chk(wr_full == (model_cnt[l][v][z] == BIN_DEPTH), "wr_full");
      if (!wr_full) chk(int'(wr_slot) == model_cnt[l][v][z], "wr_slot");
      if (model_cnt[l][v][z] < BIN_DEPTH) begin
        model_mem[l][v][z][model_cnt[l][v][z]] = wr_stub;
        model_cnt[l][v][z]++;
      end else n_full++;
      @(posedge clk);
    end
    @(negedge clk);
    wr_en = 1'b0;
    // read back through both ports
    foreach (model_cnt[l, v, z]) begin
      chk(int'(counts[l][v][z]) == model_cnt[l][v][z], "counts");
      for (int s = 0; s < model_cnt[l][v][z]; s++) begin
        ra_addr = '{layer: layer_t'(l), vm: vm_t'(v), zb: zb_t'(z), slot: slot_t'(s)};
        rb_addr = ra_addr;
        #1;
        chk(ra_stub == model_mem[l][v][z][s] && rb_stub == model_mem[l][v][z][s], "read data");
        chk(int'(ra_count) == model_cnt[l][v][z] && int'(rb_count) == model_cnt[l][v][z], "read count");
      end
    end
    chk(n_full > 0, "no bin overflowed");
    // clear
    @(negedge clk);
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    foreach (model_cnt[l, v, z]) chk(counts[l][v][z] == '0, "clear");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
