// tb_vm_router -- drives random stubs into vm_router, one per clock, and
// checks the bin of every write against VM = floor(phi*N_VM/PHI_SPAN) and
// z bin = floor((z + 1024)/256) clipped to 0..7, computed here in floating
// point.  A model of the memory's full flag checks the drop counting.
// Checks the one-clock latency and the full rate for N_VM = 16 and 32.
module tb_vm_router;
  import l1tf_pkg::*;
  import l1tf_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        clear, in_valid;
  stub_t       in_stub;
  logic        we16, we32, full16, full32;
  stub_id_t    bin16, bin32;
  stub_t       ws16, ws32;
  logic [15:0] nr16, nd16, nr32, nd32;

  vm_router #(.N_VM(16)) dut16 (.clk, .rst_n, .clear, .in_valid, .in_stub,
    .wr_en(we16), .wr_bin(bin16), .wr_stub(ws16), .wr_full(full16),
    .n_routed(nr16), .n_dropped(nd16));
  vm_router #(.N_VM(32)) dut32 (.clk, .rst_n, .clear, .in_valid, .in_stub,
    .wr_en(we32), .wr_bin(bin32), .wr_stub(ws32), .wr_full(full32),
    .n_routed(nr32), .n_dropped(nd32));

  int fill16 [N_LAYERS][32][N_ZBIN];
  int exp_routed = 0, exp_dropped = 0;

  // a bin counts as full after BIN_DEPTH writes (model of vm_stub_memory)
  assign full16 = we16 && fill16[bin16.layer][bin16.vm][bin16.zb] >= BIN_DEPTH;
  assign full32 = 1'b0;

  function automatic int exp_vm(int phi, int nvm);
    int v = int'($floor(real'(phi) * real'(nvm) / real'(PHI_SPAN)));
    return (v > nvm - 1) ? nvm - 1 : v;
  endfunction
  function automatic int exp_zb(int z);
    int b = int'($floor((real'(z) + 1024.0) / 256.0));
    return (b < 0) ? 0 : (b > 7) ? 7 : b;
  endfunction

  stub_t prev;
  logic  prev_v;

  task automatic chk(bit ok, string msg);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", msg);
    end
  endtask

  always @(posedge clk) if (rst_n && we16) begin
    if (fill16[bin16.layer][bin16.vm][bin16.zb] >= BIN_DEPTH) exp_dropped++;
    else begin
      fill16[bin16.layer][bin16.vm][bin16.zb]++;
      exp_routed++;
    end
  end

  initial begin
    clear = 1'b0; in_valid = 1'b0; in_stub = '0; prev_v = 1'b0; prev = '0;
    foreach (fill16[l, v, z]) fill16[l][v][z] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 3000; i++) begin
      stub_t s;
      s.layer = layer_t'(irand(0, N_LAYERS - 1));
      s.phi   = phi_t'((i < 2000) ? irand(0, PHI_SPAN - 1) : irand(0, 300));
      s.z     = z_t'((i < 2000) ? irand(-2048, 2047) : irand(-1024, -900));
      @(negedge clk);
      // output of the previous clock's stub
      if (prev_v) begin
        chk(we16 && we32, "write one clock after the stub");
        chk(int'(bin16.vm) == exp_vm(int'(prev.phi), 16) && int'(bin32.vm) == exp_vm(int'(prev.phi), 32),
            $sformatf("vm of phi %0d: %0d/%0d", prev.phi, bin16.vm, bin32.vm));
        chk(int'(bin16.zb) == exp_zb(int'(prev.z)) && bin16.layer == prev.layer, "z bin / layer");
        chk(ws16 == prev, "stub data");
      end
      in_valid = 1'b1;
      in_stub  = s;
      prev     = s;
      prev_v   = 1'b1;
    end
    @(negedge clk);
    in_valid = 1'b0;
    @(negedge clk);
    chk(!we16, "no write without a stub");
    chk(int'(nr16) == exp_routed && int'(nd16) == exp_dropped,
        $sformatf("counts %0d/%0d expected %0d/%0d", nr16, nd16, exp_routed, exp_dropped));
    chk(exp_dropped > 0, "drops exercised");
    chk(int'(nr32) == 3000 && nd32 == 0, "routed count");
    clear = 1'b1;
    @(negedge clk);
    clear = 1'b0;
    chk(nr16 == 0 && nd16 == 0, "clear");
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
