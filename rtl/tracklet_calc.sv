// tracklet_calc -- turns a seed stub pair into a tracklet.
//
// Assuming the track comes from the beamline, two stubs fix the four track
// parameters.  The track model is the linearised helix: in each plane the
// measurement is a straight line in r, m(r) = a + b*h, h = (r - R_REF)/256 mm,
// so (phi, z) at the two seed radii give
//   b = (m_out - m_in) * 256 / (R_out - R_in)      (constant reciprocal)
//   a = m_in - h_in * b.
// b_phi is proportional to the curvature and is cut at the pT = 2 GeV value;
// z0 = a_z + h(r=0)*b_z is cut at |z0| <= 150 mm.  The tracklet is then
// projected to the four other layers, m_proj = a + h_layer*b, rounded to the
// stub grid.  A projection outside the sector's phi range or outside the
// modelled z range is marked invalid.
//
// Interface: in_valid/in_seed/in_inner/in_outer, one pair per clock, no
// back-pressure.  out_valid/out_tl for pairs that pass both cuts;
// rej_pt/rej_z0 pulse for pairs that fail (pT cut checked first).
// Timing: fully pipelined, one register stage (latency 1, one pair per clock).
// From the description: helix parameters and projections computed for the
// seeds assuming an origin on the beamline, pT > 2 GeV.  Own choices: the
// linearised model, fixed-point format (Q16), the z0 window.
module tracklet_calc
  import l1tf_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  seed_t       in_seed,
  input  layer_stub_t in_inner,
  input  layer_stub_t in_outer,
  output logic        out_valid,
  output tracklet_t   out_tl,
  output logic        rej_pt,
  output logic        rej_z0
);

  localparam longint RECIP [N_SEED] = '{seed_recip(0), seed_recip(1), seed_recip(2)};
  localparam longint HQ [N_LAYERS]  = '{h_q16(0), h_q16(1), h_q16(2), h_q16(3), h_q16(4), h_q16(5)};
  localparam longint H0_Q16 = -longint'(R_REF_MM) * 256;   // h at r = 0

  function automatic int plyr(seed_t s, int p);
    return proj_layer(int'(s), p);
  endfunction

  longint    b_phi, a_phi, b_z, a_z, z0, recip, h_in;
  logic      pt_ok, z0_ok;
  tracklet_t tl;

  always_comb begin
    recip = RECIP[0];
    h_in  = HQ[0];
    for (int s = 0; s < N_SEED; s++) begin
      if (in_seed == seed_t'(s)) begin
        recip = RECIP[s];
        h_in  = HQ[2*s];
      end
    end
    b_phi = ((longint'(in_outer.phi) - longint'(in_inner.phi)) * recip) >>> 16;
    a_phi = (longint'(in_inner.phi) <<< 16) - ((h_in * b_phi) >>> 16);
    b_z   = ((longint'(in_outer.z) - longint'(in_inner.z)) * recip) >>> 16;
    a_z   = (longint'(in_inner.z) <<< 16) - ((h_in * b_z) >>> 16);
    z0    = a_z + ((H0_Q16 * b_z) >>> 16);
    pt_ok = abs64(b_phi) <= B_PHI_MAX_Q16;
    z0_ok = abs64(z0) <= (longint'(Z0_MAX_MM) <<< 16);

    tl = '0;
    tl.trk.seed      = in_seed;
    tl.trk.par.a_phi = par_t'(a_phi);
    tl.trk.par.b_phi = par_t'(b_phi);
    tl.trk.par.a_z   = par_t'(a_z);
    tl.trk.par.b_z   = par_t'(b_z);
    for (int l = 0; l < N_LAYERS; l++) begin
      if (layer_t'(l) == in_inner.id.layer) tl.trk.st[l] = in_inner;
      if (layer_t'(l) == in_outer.id.layer) tl.trk.st[l] = in_outer;
    end
    for (int p = 0; p < N_PROJ; p++) begin
      longint hp, pp, zp;
      int     lp;
      lp = plyr(in_seed, p);
      hp = HQ[0];
      for (int l = 0; l < N_LAYERS; l++) if (l == lp) hp = HQ[l];
      pp = (a_phi + ((hp * b_phi) >>> 16) + 32768) >>> 16;
      zp = (a_z   + ((hp * b_z)   >>> 16) + 32768) >>> 16;
      tl.proj[p].layer = layer_t'(lp);
      tl.proj[p].phi   = phi_t'(pp);
      tl.proj[p].z     = z_t'(zp);
      tl.proj[p].valid = (pp >= 0) && (pp < PHI_SPAN) &&
                         (zp >= -Z_HALF_MM) && (zp < Z_HALF_MM);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      rej_pt    <= 1'b0;
      rej_z0    <= 1'b0;
      out_tl    <= '0;
    end else begin
      out_valid <= in_valid && pt_ok && z0_ok;
      rej_pt    <= in_valid && !pt_ok;
      rej_z0    <= in_valid && pt_ok && !z0_ok;
      out_tl    <= tl;
    end
  end

endmodule
