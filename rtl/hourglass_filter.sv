// hourglass_filter -- sector acceptance at the input of a sector processor.
//
// The tracker is cut into nine phi sectors whose edges are not radial lines
// but curves of pT = 2 GeV tracks crossing the sector boundary at the critical
// radius R* ("hourglass" sectors).  A track above threshold then lies entirely
// in one sector.  Equivalently, a stub at radius r belongs to sector k when
// its phi is within |r - R*| * DPHI_DR_MAX of sector k's phi range at R*.
// Stubs near a boundary therefore belong to two sectors (the overlap region)
// and are accepted by both processors.
//
// Each accepted stub leaves with a sector-local phi,
//   phi_local = phi - phi_lo(SECTOR) + PHI_MARGIN,
// which lies in 0 .. PHI_SPAN-1.  Rejected stubs raise out_reject.
//
// Interface: in_valid/in_stub, one stub per clock, no back-pressure.
// Timing: one register stage; out_valid/out_reject follow in_valid by one clock.
// From the description: nine sectors, hourglass shape set by R*.  Own choices:
// the value of R* (665 mm, which minimises the largest overlap for the six
// nominal radii), the linear bend model and all widths.
module hourglass_filter
  import l1tf_pkg::*;
#(
  parameter int SECTOR = 0
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  gstub_t in_stub,
  output logic   out_valid,
  output stub_t  out_stub,
  output logic   out_reject
);

  localparam int PHI_LO = (SECTOR * 65536) / N_SECTORS;
  localparam int PHI_HI = ((SECTOR + 1) * 65536) / N_SECTORS - 1;

  function automatic int delta_of(int l);
    int dr = R_MM[l] - R_STAR_MM;
    if (dr < 0) dr = -dr;
    return int'((DPHI_DR_MAX_Q16 * longint'(dr)) >>> 16);
  endfunction

  logic signed [GPHI_W-1:0] d;      // phi - PHI_LO, modulo 2*pi
  logic signed [GPHI_W+1:0] dd;
  int                       delta;
  logic                     accept;

  always_comb begin
    d      = $signed(in_stub.phi - gphi_t'(PHI_LO));
    dd     = (GPHI_W+2)'(d);
    delta  = 0;
    for (int l = 0; l < N_LAYERS; l++)
      if (in_stub.layer == layer_t'(l)) delta = delta_of(l);
    accept = (in_stub.layer < layer_t'(N_LAYERS)) &&
             (int'(dd) >= -delta) && (int'(dd) <= PHI_HI - PHI_LO + delta);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_reject <= 1'b0;
      out_stub   <= '0;
    end else begin
      out_valid  <= in_valid && accept;
      out_reject <= in_valid && !accept;
      out_stub.layer <= in_stub.layer;
      out_stub.phi   <= phi_t'(dd + (GPHI_W+2)'(PHI_MARGIN));
      out_stub.z     <= in_stub.z;
    end
  end

endmodule
