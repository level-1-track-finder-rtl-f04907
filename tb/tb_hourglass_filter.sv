// tb_hourglass_filter -- checks sector acceptance and local phi of
// hourglass_filter for sector 0 (phi wrap-around) and sector 5.
// The expected acceptance is worked out in floating point from the pT = 2 GeV
// bend between the stub radius and R*; stubs within two LSB of an edge are
// not judged.  Also checks the one-clock latency.
module tb_hourglass_filter;
  import l1tf_pkg::*;
  import l1tf_tb_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic   in_valid;
  gstub_t in_stub;
  logic   v0, r0, v5, r5;
  stub_t  s0, s5;

  hourglass_filter #(.SECTOR(0)) dut0 (.clk, .rst_n, .in_valid, .in_stub,
    .out_valid(v0), .out_stub(s0), .out_reject(r0));
  hourglass_filter #(.SECTOR(5)) dut5 (.clk, .rst_n, .in_valid, .in_stub,
    .out_valid(v5), .out_stub(s5), .out_reject(r5));

  // 1: accept, 0: reject, -1: too close to an edge to judge
  function automatic int expect_acc(gstub_t g, int k);
    real d, lo, hi, del, p;
    del = RINV_2GEV / 2.0 / PHI_LSB * absr(radius(int'(g.layer)) - real'(R_STAR_MM));
    lo  = sector_lo(k) - del;
    hi  = sector_lo(k + 1) + del;
    p   = real'(g.phi);
    d   = p - lo;
    if (d < -32768.0) d += 65536.0;
    if (d >= 32768.0) d -= 65536.0;
    if (absr(d) < 2.0 || absr(d - (hi - lo)) < 2.0) return -1;
    return (d >= 0.0 && d < hi - lo) ? 1 : 0;
  endfunction

  task automatic judge(gstub_t g, int k, logic v, logic r, stub_t s);
    int e = expect_acc(g, k);
    if (e < 0) return;
    checks++;
    if (v !== (e == 1) || r !== (e == 0)) begin
      failures++;
      $display("FAIL sector %0d phi %0d layer %0d: valid %b reject %b expected %0d",
               k, g.phi, g.layer, v, r, e);
    end else if (e == 1) begin
      checks++;
      if (int'(s.phi) != local_phi(int'(g.phi), k) || s.z != g.z || s.layer != g.layer) begin
        failures++;
        $display("FAIL sector %0d local phi %0d expected %0d", k, s.phi, local_phi(int'(g.phi), k));
      end
    end
  endtask

  int n_acc0 = 0, n_acc5 = 0;

  initial begin
    in_valid = 1'b0;
    in_stub  = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    for (int i = 0; i < 4000; i++) begin
      gstub_t g;
      g.layer = layer_t'(irand(0, N_LAYERS - 1));
      // half near sector 0 (incl. wrap), half near sector 5
      if (i % 2 == 0) g.phi = gphi_t'(irand(-9000, 9000) + (irand(0, 1) ? 0 : 7282));
      else            g.phi = gphi_t'(int'(sector_lo(5)) + irand(-2500, 9800));
      g.z = z_t'(irand(-1000, 1000));
      @(negedge clk);
      in_valid = 1'b1;
      in_stub  = g;
      @(posedge clk);
      #1;
      judge(g, 0, v0, r0, s0);
      judge(g, 5, v5, r5, s5);
      if (v0) n_acc0++;
      if (v5) n_acc5++;
    end
    @(negedge clk);
    in_valid = 1'b0;
    @(posedge clk);
    #1;
    checks++;
    if (v0 || r0 || v5 || r5) begin
      failures++;
      $display("FAIL outputs active without input");
    end
    checks++;
    if (n_acc0 < 100 || n_acc5 < 100) begin
      failures++;
      $display("FAIL too few accepted stubs %0d %0d", n_acc0, n_acc5);
    end
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
