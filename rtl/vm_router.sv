// vm_router -- sorts the stubs of one sector into virtual modules.
//
// Each barrel layer of the sector is cut into N_VM equal slices in local phi
// (virtual modules, VMs) and into eight slices in z.  The router computes the
// (VM, z bin) of every incoming stub and writes the stub into that bin of the
// VM stub memory.  Later steps only ever look at bins that a track above the
// pT threshold can connect, which is what keeps pairing and matching cheap.
// A stub whose bin is already full is dropped and counted (n_dropped).
//
// Interface: in_valid/in_stub, one stub per clock, no back-pressure; a write
// port towards vm_stub_memory (wr_en, wr_bin, wr_stub, wr_full from the
// memory).  n_routed/n_dropped count since the last clear.
// Timing: one register stage; the stub is written one clock after it
// arrives.  Throughput one stub per clock.
// From the description: 16 or 32 VMs per layer per sector and eight z bins.
// Own choices: equal-width bins, the z range (-1024..1023 mm, saturating) and
// dropping on a full bin.
module vm_router
  import l1tf_pkg::*;
#(
  parameter int N_VM = 16
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        in_valid,
  input  stub_t       in_stub,
  // memory write port
  output logic        wr_en,
  output stub_id_t    wr_bin,
  output stub_t       wr_stub,
  input  logic        wr_full,
  // statistics
  output logic [15:0] n_routed,
  output logic [15:0] n_dropped
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_en   <= 1'b0;
      wr_bin  <= '0;
      wr_stub <= '0;
    end else begin
      wr_en          <= in_valid && !clear;
      wr_stub        <= in_stub;
      wr_bin.layer   <= in_stub.layer;
      wr_bin.vm      <= vm_of({1'b0, in_stub.phi}, N_VM);
      wr_bin.zb      <= zb_of((Z_W+2)'(in_stub.z));
      wr_bin.slot    <= '0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_routed  <= '0;
      n_dropped <= '0;
    end else if (clear) begin
      n_routed  <= '0;
      n_dropped <= '0;
    end else if (wr_en) begin
      if (wr_full) n_dropped <= n_dropped + 16'd1;
      else         n_routed  <= n_routed + 16'd1;
    end
  end

endmodule
