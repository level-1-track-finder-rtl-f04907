// kalman_fitter -- final track fit of the sector processor.
//
// The filter starts from the coarse parameters of the tracklet that seeded
// the track, with a loose diagonal covariance (P0_*), and then adds the
// track's stubs one by one, innermost layer first, each time refining the
// parameters and shrinking the covariance.  The beamline constraint leaves
// four parameters (phi and z lines, i.e. phi0, curvature, z0, cot theta),
// fitted as two independent two-parameter filters (kf_update).  The output
// carries the fitted parameters, the chi-square of each plane (sum of
// r^2/S over the added stubs) and the stubs used.
//
// Measurement variances (Q16): V_PHI for phi in every layer; V_Z_PS for z in
// the three inner (pixel-strip) layers and V_Z_2S in the three outer
// (strip-strip) layers, whose z is only known to a strip length.
//
// Interface: in_valid/in_ready/in_trk handshake; out_valid/out_fit pulse for
// one clock per fitted track (no back-pressure).
// Timing: a track occupies the fitter for N_LAYERS + 2 clocks (load, one
// clock per layer whether it holds a stub or not, output); in_ready is high
// only when idle.
// From the description: Kalman filter starting from the tracklet's helix
// parameters, stubs added one by one, four parameters with a beamline
// constraint.  Own choices: stub order, variances, initial covariance, the
// fixed-point format.
module kalman_fitter
  import l1tf_pkg::*;
#(
  parameter longint P0_PHI = 256  * 65536,  // initial variance, phi plane (a and b)
  parameter longint P0_Z   = 4096 * 65536,  // initial variance, z plane (a and b)
  parameter longint V_PHI  = 1    * 65536,  // phi measurement variance, LSB^2
  parameter longint V_Z_PS = 1    * 65536,  // z variance, pixel-strip layers, mm^2
  parameter longint V_Z_2S = 36   * 65536   // z variance, strip-strip layers, mm^2
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  track_t     in_trk,
  output logic       out_valid,
  output fit_track_t out_fit
);

  localparam longint HQ [N_LAYERS] = '{h_q16(0), h_q16(1), h_q16(2), h_q16(3), h_q16(4), h_q16(5)};

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_OUT} state_t;
  state_t state;

  track_t             trk;
  logic [2:0]         l;
  logic signed [63:0] ap, bp, pp00, pp01, pp11, az, bz, pz00, pz01, pz11;
  logic signed [63:0] chi_p, chi_z;

  // current layer's measurement
  layer_stub_t        cur;
  logic signed [63:0] h, mp, mz, vz;
  always_comb begin
    cur = trk.st[0];
    h   = HQ[0];
    for (int k = 0; k < N_LAYERS; k++)
      if (l == 3'(k)) begin
        cur = trk.st[k];
        h   = HQ[k];
      end
    mp = 64'(cur.phi) <<< 16;
    mz = 64'($signed(cur.z)) <<< 16;
    vz = (l < 3'(3)) ? V_Z_PS : V_Z_2S;
  end

  logic signed [63:0] ap_n, bp_n, pp00_n, pp01_n, pp11_n, cp;
  logic signed [63:0] az_n, bz_n, pz00_n, pz01_n, pz11_n, cz;

  kf_update u_phi (
    .a(ap), .b(bp), .p00(pp00), .p01(pp01), .p11(pp11), .h(h), .m(mp), .v(V_PHI),
    .a_n(ap_n), .b_n(bp_n), .p00_n(pp00_n), .p01_n(pp01_n), .p11_n(pp11_n), .chi2(cp)
  );
  kf_update u_z (
    .a(az), .b(bz), .p00(pz00), .p01(pz01), .p11(pz11), .h(h), .m(mz), .v(vz),
    .a_n(az_n), .b_n(bz_n), .p00_n(pz00_n), .p01_n(pz01_n), .p11_n(pz11_n), .chi2(cz)
  );

  function automatic logic [31:0] sat32(logic signed [63:0] x);
    if (x < 0) return '0;
    if (x > 64'sh0000_0000_FFFF_FFFF) return '1;
    return x[31:0];
  endfunction

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      trk       <= '0;
      l         <= '0;
      {ap, bp, pp00, pp01, pp11} <= '0;
      {az, bz, pz00, pz01, pz11} <= '0;
      chi_p     <= '0;
      chi_z     <= '0;
      out_valid <= 1'b0;
      out_fit   <= '0;
    end else begin
      out_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (in_valid) begin
          trk   <= in_trk;
          l     <= '0;
          ap    <= 64'(in_trk.par.a_phi);
          bp    <= 64'(in_trk.par.b_phi);
          az    <= 64'(in_trk.par.a_z);
          bz    <= 64'(in_trk.par.b_z);
          pp00  <= P0_PHI;  pp01 <= '0;  pp11 <= P0_PHI;
          pz00  <= P0_Z;    pz01 <= '0;  pz11 <= P0_Z;
          chi_p <= '0;
          chi_z <= '0;
          state <= S_RUN;
        end
        S_RUN: begin
          if (cur.valid) begin
            ap <= ap_n;  bp <= bp_n;  pp00 <= pp00_n;  pp01 <= pp01_n;  pp11 <= pp11_n;
            az <= az_n;  bz <= bz_n;  pz00 <= pz00_n;  pz01 <= pz01_n;  pz11 <= pz11_n;
            chi_p <= chi_p + cp;
            chi_z <= chi_z + cz;
          end
          if (l == 3'(N_LAYERS - 1)) state <= S_OUT;
          l <= l + 1'b1;
        end
        S_OUT: begin
          out_valid         <= 1'b1;
          out_fit.seed      <= trk.seed;
          out_fit.par.a_phi <= par_t'(ap);
          out_fit.par.b_phi <= par_t'(bp);
          out_fit.par.a_z   <= par_t'(az);
          out_fit.par.b_z   <= par_t'(bz);
          out_fit.chi2_phi  <= sat32(chi_p);
          out_fit.chi2_z    <= sat32(chi_z);
          for (int k = 0; k < N_LAYERS; k++) begin
            out_fit.mask[k] <= trk.st[k].valid;
            out_fit.ids[k]  <= trk.st[k].id;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
