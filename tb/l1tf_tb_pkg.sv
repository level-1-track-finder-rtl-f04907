// l1tf_tb_pkg -- reference model shared by the testbenches.
//
// Tracks are described in physical units (phi0 in rad at r = 0, curvature
// rinv in 1/mm, z0 in mm, cot(theta)) with the linearised helix
// phi(r) = phi0 - r*rinv/2, z(r) = z0 + r*cot(theta), evaluated in floating
// point, so the expected values do not reuse the fixed-point arithmetic of
// the design.  Also holds the check counters and the check task.
package l1tf_tb_pkg;
  import l1tf_pkg::*;

  localparam real PI      = 3.14159265358979323846;
  localparam real PHI_LSB = 2.0 * PI / 65536.0;     // rad per phi LSB
  localparam real RINV_2GEV = 0.3 * 3.8 / 2.0 / 1000.0; // 1/mm at pT = 2 GeV

  typedef struct {
    real phi0;   // rad
    real rinv;   // 1/mm
    real z0;     // mm
    real t;      // cot(theta)
  } trk_truth_t;

  function automatic real radius(int l);
    return real'(R_MM[l]);
  endfunction

  // Global phi (LSB, real, unwrapped) of the track at layer l.
  function automatic real phi_at(trk_truth_t tr, int l);
    return (tr.phi0 - radius(l) * tr.rinv / 2.0) / PHI_LSB;
  endfunction

  function automatic real z_at(trk_truth_t tr, int l);
    return tr.z0 + radius(l) * tr.t;
  endfunction

  // Stub of the track at layer l, rounded, with optional noise.
  function automatic gstub_t stub_of(trk_truth_t tr, int l, int dphi = 0, int dz = 0);
    gstub_t s;
    longint p;
    p = longint'($floor(phi_at(tr, l) + 0.5)) + dphi;
    s.layer = layer_t'(l);
    s.phi   = gphi_t'(p);               // modulo 2*pi
    s.z     = z_t'($rtoi($floor(z_at(tr, l) + 0.5)) + dz);
    return s;
  endfunction

  // Low edge of a sector at R*, LSB (as real).
  function automatic real sector_lo(int k);
    return real'(k) * 65536.0 / real'(N_SECTORS);
  endfunction

  // Sector-local phi of a global phi value for sector k (no range check).
  function automatic int local_phi(int gphi, int k);
    int d;
    d = gphi - int'($floor(sector_lo(k)));
    while (d < -32768) d += 65536;
    while (d >= 32768) d -= 65536;
    return d + PHI_MARGIN;
  endfunction

  function automatic stub_t to_local(gstub_t g, int k);
    stub_t s;
    s.layer = g.layer;
    s.phi   = phi_t'(local_phi(int'(g.phi), k));
    s.z     = g.z;
    return s;
  endfunction

  // Fixed-point parameters (as reals) of a truth track in sector k.
  // a_* at R_REF, b_* per 256 mm.
  function automatic real a_phi_of(trk_truth_t tr, int k);
    real p = (tr.phi0 - real'(R_REF_MM) * tr.rinv / 2.0) / PHI_LSB;
    return p - $floor(sector_lo(k)) + PHI_MARGIN;
  endfunction
  function automatic real b_phi_of(trk_truth_t tr);
    return -256.0 * tr.rinv / 2.0 / PHI_LSB;
  endfunction
  function automatic real a_z_of(trk_truth_t tr);
    return tr.z0 + real'(R_REF_MM) * tr.t;
  endfunction
  function automatic real b_z_of(trk_truth_t tr);
    return 256.0 * tr.t;
  endfunction

  function automatic real q16(par_t p);
    return real'(p) / 65536.0;
  endfunction

  function automatic real absr(real x);
    return (x < 0.0) ? -x : x;
  endfunction

  // Uniform random real in [lo, hi).
  function automatic real urand(real lo, real hi);
    return lo + (hi - lo) * (real'($urandom) / 4294967296.0);
  endfunction

  // Random integer in [lo, hi].
  function automatic int irand(int lo, int hi);
    return lo + int'($urandom % (hi - lo + 1));
  endfunction

  // Random track inside sector k, well away from its phi edges.
  function automatic trk_truth_t random_track(int k, real z0_max = 80.0);
    trk_truth_t tr;
    real c;
    c = (sector_lo(k) + urand(0.2, 0.8) * 65536.0 / N_SECTORS) * PHI_LSB;
    tr.rinv = urand(-0.9, 0.9) * RINV_2GEV;
    tr.phi0 = c + real'(R_STAR_MM) * tr.rinv / 2.0;   // crosses R* at c
    tr.z0   = urand(-z0_max, z0_max);
    tr.t    = urand(-0.8, 0.8);
    return tr;
  endfunction

endpackage
