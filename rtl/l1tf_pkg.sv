// l1tf_pkg -- shared types, constants and constant functions of the
// L1 hybrid track finder (one hourglass sector processor).
//
// The algorithm follows the hybrid tracklet / Kalman-filter scheme: stubs are
// binned into virtual modules (VMs) in phi and into eight bins in z, stub
// pairs in adjacent barrel layers seed tracklets, tracklets are projected to
// the other four layers and matched, duplicates that share at least four
// stubs are merged and the survivors are fitted by a four-parameter Kalman
// filter.  Numbers quoted by the description of the algorithm: nine sectors,
// time multiplexing by 18, 16 or 32 VMs per layer per sector, eight z bins,
// a 2 GeV pT threshold, merge at four shared stubs, four fitted parameters,
// six barrel layers.  Everything else in this file (units, widths, layer
// radii, cut values, memory depths) is this implementation's choice.
//
// Units
//   phi  : global phi is 16 bits over 2*pi (LSB = 2*pi/65536 = 95.87 urad);
//          sector-local phi is the same LSB, offset so that it is >= 0.
//   z    : signed millimetres.  r : millimetres, one nominal radius per layer.
//   Track parameters use a straight-line (linearised helix) model per plane,
//   m(r) = a + b*h with h = (r - R_REF)/256 mm, all values in Q16 fixed
//   point: a_phi [phi LSB], b_phi [phi LSB per 256 mm], a_z [mm],
//   b_z [mm per 256 mm].  With phi(r) = phi0 - r*rinv/2 this gives
//   rinv = -2*b_phi*LSB/256 mm^-1, cot(theta) = b_z/256,
//   phi0 = a_phi - (R_REF/256)*b_phi and z0 = a_z - (R_REF/256)*b_z.
package l1tf_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int N_LAYERS   = 6;      // barrel layers seen by the algorithm
  localparam int N_SECTORS  = 9;      // hourglass sectors in phi
  localparam int TM_FACTOR  = 18;     // time-multiplexing period in bunch crossings
  localparam int N_SEED     = 3;      // seeding pairs L1L2, L3L4, L5L6
  localparam int N_PROJ     = 4;      // each seed projects to the four other layers

  localparam int R_REF_MM   = 600;    // reference radius of the track model
  localparam int R_STAR_MM  = 665;    // critical radius R* of the hourglass sectors
  // Nominal barrel radii in mm, innermost first.
  localparam int R_MM [N_LAYERS] = '{250, 350, 500, 680, 880, 1080};

  // Max |dphi/dr| of a pT = 2 GeV track in B = 3.8 T: rinv/2 = 0.3*3.8/2/2 m^-1
  // = 2.85e-4 rad/mm = 2.97266 phi LSB per mm, held in Q16.
  localparam longint DPHI_DR_MAX_Q16 = 194817;
  // Same limit as a Q16 bound on b_phi (per 256 mm).
  localparam longint B_PHI_MAX_Q16   = DPHI_DR_MAX_Q16 * 256;
  localparam int     Z0_MAX_MM       = 150;   // luminous region accepted for seeds

  // ------------------------------------------------------------ phi sectors
  localparam int GPHI_W      = 16;
  localparam int PHI_W       = 14;
  localparam int SECTOR_W    = 7282;  // ceil(65536/9) LSB at R = R*
  localparam int PHI_MARGIN  = 1280;  // >= max_l |R_l - R*| * DPHI_DR_MAX = 1234
  localparam int PHI_SPAN    = SECTOR_W + 2 * PHI_MARGIN;  // local phi range

  // ------------------------------------------------------------ binning
  localparam int MAX_VM      = 32;    // widths allow 16 or 32 VMs
  localparam int VM_W        = 5;
  localparam int N_ZBIN      = 8;
  localparam int ZB_W        = 3;
  localparam int ZBIN_SHIFT  = 8;     // 256 mm z bins covering -1024..1023 mm
  localparam int Z_HALF_MM   = 1024;
  localparam int BIN_DEPTH   = 8;     // stubs kept per (layer, VM, z bin)
  localparam int SLOT_W      = 3;
  localparam int CNT_W       = 4;     // 0..BIN_DEPTH
  localparam int Z_W         = 12;

  // ------------------------------------------------------------ matching / fit
  localparam int PHI_CUT     = 48;    // phi residual window, LSB
  localparam int Z_CUT_MM    = 128;   // z residual window, mm
  localparam int MIN_MATCH   = 2;     // matched layers needed for a track
  localparam int MERGE_SHARED = 4;    // duplicates share at least this many stubs
  localparam int PAIR_SLACK_PHI = 8;  // LSB of slack on the VM pair table
  localparam int PAIR_SLACK_Z   = 16; // mm of slack on the z bin pair table

  // ---------------------------------------------------------------- types
  typedef logic [2:0]               layer_t;
  typedef logic [GPHI_W-1:0]        gphi_t;
  typedef logic [PHI_W-1:0]         phi_t;
  typedef logic signed [Z_W-1:0]    z_t;
  typedef logic [VM_W-1:0]          vm_t;
  typedef logic [ZB_W-1:0]          zb_t;
  typedef logic [SLOT_W-1:0]        slot_t;
  typedef logic [CNT_W-1:0]         cnt_t;
  typedef logic signed [39:0]       par_t;   // Q16 track parameter
  typedef logic [1:0]               seed_t;

  // Stub as delivered to a sector processor (global phi).
  typedef struct packed {
    layer_t layer;
    gphi_t  phi;
    z_t     z;
  } gstub_t;

  // Stub in sector-local coordinates.
  typedef struct packed {
    layer_t layer;
    phi_t   phi;
    z_t     z;
  } stub_t;

  // Address of a stub in the VM memory; unique within an event.
  typedef struct packed {
    layer_t layer;
    vm_t    vm;
    zb_t    zb;
    slot_t  slot;
  } stub_id_t;

  typedef struct packed {
    logic     valid;
    stub_id_t id;
    phi_t     phi;
    z_t       z;
  } layer_stub_t;

  typedef struct packed {
    par_t a_phi;
    par_t b_phi;
    par_t a_z;
    par_t b_z;
  } helix_t;

  typedef struct packed {
    logic   valid;
    layer_t layer;
    phi_t   phi;
    z_t     z;
  } proj_t;

  // Track candidate: seed, coarse parameters and one stub slot per layer.
  typedef struct packed {
    seed_t                           seed;
    helix_t                          par;
    layer_stub_t [N_LAYERS-1:0]      st;
  } track_t;

  // Tracklet: a track candidate holding only its two seed stubs, plus its
  // projections to the other layers.
  typedef struct packed {
    track_t                  trk;
    proj_t [N_PROJ-1:0]      proj;
  } tracklet_t;

  // Fitted track leaving the sector processor.
  typedef struct packed {
    seed_t                       seed;
    helix_t                      par;
    logic [31:0]                 chi2_phi;  // Q16
    logic [31:0]                 chi2_z;    // Q16
    logic [N_LAYERS-1:0]         mask;
    stub_id_t [N_LAYERS-1:0]     ids;
  } fit_track_t;

  // Per-event counters reported by the sector processor.
  typedef struct packed {
    logic [15:0] stubs_in;        // stubs offered to the sector
    logic [15:0] hg_rejected;     // outside the hourglass sector
    logic [15:0] vm_routed;       // written to the VM memory
    logic [15:0] vm_dropped;      // lost to a full VM bin
    logic [15:0] pairs;           // candidate stub pairs
    logic [15:0] rej_pt;          // pairs failing the pT cut
    logic [15:0] rej_z0;          // pairs failing the z0 cut
    logic [15:0] tracklets;       // tracklets formed (stored or lost)
    logic [15:0] tl_overflow;     // tracklets lost to a full buffer
    logic [15:0] proj_invalid;    // projections outside the sector or z range
    logic [15:0] proj_hit;        // projections with a matched stub
    logic [15:0] proj_miss;       // projections without one
    logic [15:0] rej_few;         // tracklets with too few matches
    logic [15:0] candidates;      // track candidates into duplicate removal
    logic [15:0] merged;          // candidates merged into an earlier one
    logic [15:0] dr_overflow;     // candidates lost to a full store
    logic [15:0] fitted;          // tracks fitted and sent out
    logic [31:0] cycles;          // clocks from first stub to end of event
  } evt_stats_t;

  // ------------------------------------------------------- constant functions
  // Layer that projection p of seed s goes to: the four layers outside the
  // seed pair, innermost first.
  function automatic int proj_layer(int s, int p);
    int n = 0;
    for (int l = 0; l < N_LAYERS; l++) begin
      if (l != 2*s && l != 2*s+1) begin
        if (n == p) return l;
        n++;
      end
    end
    return 0;
  endfunction

  // h of a layer in Q16: (R - R_REF)/256 * 2^16.
  function automatic longint h_q16(int l);
    return longint'(R_MM[l] - R_REF_MM) * 256;
  endfunction

  // Reciprocal used by the tracklet calculation: 256 * 2^32 / (R_out - R_in).
  function automatic longint seed_recip(int s);
    return (longint'(256) << 32) / longint'(R_MM[2*s+1] - R_MM[2*s]);
  endfunction

  // First local phi of VM v when the span is cut into nvm VMs.
  function automatic int vm_lo(int v, int nvm);
    return (v * PHI_SPAN + nvm - 1) / nvm;
  endfunction

  // VM of a local phi: floor(phi*nvm/PHI_SPAN), done with an exact
  // reciprocal multiply (error below one part in 2^32 of the quotient).
  localparam longint VM_RECIP = ((longint'(1) << 32) + PHI_SPAN - 1) / PHI_SPAN;
  function automatic vm_t vm_of(logic [PHI_W:0] phi, int nvm);
    longint q;
    q = (longint'(phi) * longint'(nvm) * VM_RECIP) >>> 32;
    if (q > nvm - 1) q = nvm - 1;
    return vm_t'(q);
  endfunction

  // z bin of a z value (saturating at the two outer bins).
  function automatic zb_t zb_of(logic signed [Z_W+1:0] z);
    logic signed [Z_W+1:0] t;
    t = (z + (Z_W+2)'(Z_HALF_MM)) >>> ZBIN_SHIFT;
    if (t < 0) return '0;
    if (t > N_ZBIN - 1) return zb_t'(N_ZBIN - 1);
    return zb_t'(t);
  endfunction

  // May a stub in VM i of the inner seed layer pair with VM j of the outer
  // one?  True when some phi pair in the two VMs differs by no more than a
  // pT = 2 GeV track bends between the two radii.
  function automatic logic vm_pair_ok(int s, int i, int j, int nvm);
    longint d;
    int lo_i, hi_i, lo_j, hi_j;
    d    = ((DPHI_DR_MAX_Q16 * longint'(R_MM[2*s+1] - R_MM[2*s])) >>> 16) + PAIR_SLACK_PHI;
    lo_i = vm_lo(i, nvm);  hi_i = vm_lo(i+1, nvm) - 1;
    lo_j = vm_lo(j, nvm);  hi_j = vm_lo(j+1, nvm) - 1;
    return (longint'(lo_j) <= longint'(hi_i) + d) && (longint'(hi_j) >= longint'(lo_i) - d);
  endfunction

  // Bit i*MAX_VM + j: vm_pair_ok(s, i, j, nvm).
  function automatic logic [MAX_VM*MAX_VM-1:0] vm_pair_table(int s, int nvm);
    logic [MAX_VM*MAX_VM-1:0] t = '0;
    for (int i = 0; i < nvm; i++)
      for (int j = 0; j < nvm; j++)
        t[i*MAX_VM + j] = vm_pair_ok(s, i, j, nvm);
    return t;
  endfunction

  function automatic int zbin_lo(int b);
    return (b == 0) ? -(1 << (Z_W-1)) : b * (1 << ZBIN_SHIFT) - Z_HALF_MM;
  endfunction
  function automatic int zbin_hi(int b);
    return (b == N_ZBIN-1) ? (1 << (Z_W-1)) - 1 : (b+1) * (1 << ZBIN_SHIFT) - Z_HALF_MM - 1;
  endfunction

  // May a stub in z bin a of the inner seed layer pair with z bin b of the
  // outer one?  True when a line from |z0| <= Z0_MAX through bin a reaches
  // bin b at the outer radius.
  function automatic logic zbin_pair_ok(int s, int a, int b);
    int ri, ro;
    longint zmin, zmax, z2;
    int z1s [2];
    int z0s [2];
    ri = R_MM[2*s];  ro = R_MM[2*s+1];
    z1s[0] = zbin_lo(a);  z1s[1] = zbin_hi(a);
    z0s[0] = -Z0_MAX_MM;  z0s[1] = Z0_MAX_MM;
    zmin = 64'sd1 << 40;  zmax = -(64'sd1 << 40);
    for (int u = 0; u < 2; u++)
      for (int v = 0; v < 2; v++) begin
        z2 = longint'(z0s[v]) + (longint'(z1s[u] - z0s[v]) * ro) / ri;
        if (z2 < zmin) zmin = z2;
        if (z2 > zmax) zmax = z2;
      end
    return (longint'(zbin_lo(b)) <= zmax + PAIR_SLACK_Z) &&
           (longint'(zbin_hi(b)) >= zmin - PAIR_SLACK_Z);
  endfunction

  // Bit a*N_ZBIN + b: zbin_pair_ok(s, a, b).
  function automatic logic [N_ZBIN*N_ZBIN-1:0] zbin_pair_table(int s);
    logic [N_ZBIN*N_ZBIN-1:0] t = '0;
    for (int a = 0; a < N_ZBIN; a++)
      for (int b = 0; b < N_ZBIN; b++)
        t[a*N_ZBIN + b] = zbin_pair_ok(s, a, b);
    return t;
  endfunction

  function automatic longint abs64(longint v);
    return (v < 0) ? -v : v;
  endfunction

endpackage
