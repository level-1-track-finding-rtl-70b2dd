// kf_state_updater: Kalman filter update of a 4-parameter helix state with one stub.
//
// The state is (inv2R, phi0) in the transverse plane and (tanLambda, z0) in
// the longitudinal plane, each pair with its own 2x2 covariance (no r-phi /
// r-z cross terms: this design's simplification). A stub at radius r gives
// one measurement per plane, linear in the state:
//   phi = phi0 - r * inv2R        (h = -r)
//   z   = z0   + r * tanLambda    (h = +r)
// For each plane, with state (a, b), covariance C and hit variance V:
//   res  = m - (b + h a)
//   HCa  = h Caa + Cab,  HCb = h Cab + Cbb      (covariance of prediction)
//   S    = V + h HCa + HCb                      (residual variance)
//   Ka   = HCa / S,      Kb = HCb / S           (gains)
//   a'   = a + Ka res,   b' = b + Kb res
//   Caa' = Caa - Ka HCa, Cab' = Cab - Ka HCb, Cbb' = Cbb - Kb HCb
//   chi2' = chi2 + res^2 / S
// i.e. the new state is the weighted average of the state so far (seed and
// earlier stubs) and the new stub. All products with h are scaled by
// 2^-H_SHIFT. 1/S is one pipelined reciprocal (kf_recip) per plane; the
// gains carry K_FRAC fractional bits. Results saturate to the state widths.
//
// Hit variances: V_phi comes from a per-layer table (strip pitch over the
// layer radius, this design's values) and, following the paper, is inflated
// for multiple scattering by (0.75 mrad / pT)^2, which in these units is
// ((|inv2R| * MS_K) >> 17)^2 for a 3.8 T field. V_z is one of two
// values, for PS macro-pixels (1.5 mm long) and for 2S strips (taken as 5 cm
// long, an assumption). Disk stubs use the same linear model.
//
// Timing: fully pipelined, one stub per clock, no stall. LATENCY is the
// number of clock cycles from in_valid to out_valid; its default, 46, is the
// state updater latency the paper reports for a KU115 at 320 MHz. The
// arithmetic needs MIN_LATENCY cycles and the rest is a delay line.
module kf_state_updater
  import kf_pkg::*;
#(
  parameter int LATENCY = 46,
  parameter int RB      = 48,   // reciprocal scale, 1/S = q / 2^RB
  parameter int K_FRAC  = 20,
  parameter int MS_K    = 421,
  parameter int V_PHI [NLAYER] = '{990, 505, 247, 126, 76, 51, 247, 247, 247, 247, 247},
  parameter int V_Z_PS = 19,
  parameter int V_Z_2S = 20736
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  state_t in_state,
  input  stub_t  in_stub,
  output logic   out_valid,
  output state_t out_state,
  output logic   busy          // any valid state inside the pipeline
);
  localparam int BPS         = 2;
  localparam int DIV_STAGES  = (RB + 1 + BPS - 1) / BPS;
  localparam int MIN_LATENCY = DIV_STAGES + 4;
  localparam int PAD         = LATENCY - MIN_LATENCY;

  typedef logic signed [47:0]  hc_t;    // covariance of the prediction
  typedef logic signed [127:0] wide_t;  // products before scaling

  typedef struct packed {
    logic signed [31:0] res;
    hc_t                hca;
    hc_t                hcb;
  } plane_t;

  typedef struct packed {
    state_t s;
    plane_t p_rphi;
    plane_t p_rz;
    logic [3:0] layer;
  } ctx_t;

  function automatic logic signed [PAR_W-1:0] sat_par(wide_t x);
    if (x > wide_t'(2**(PAR_W-1) - 1))       return {1'b0, {(PAR_W-1){1'b1}}};
    else if (x < -wide_t'(2**(PAR_W-1)))     return {1'b1, {(PAR_W-1){1'b0}}};
    else                                     return x[PAR_W-1:0];
  endfunction

  function automatic logic signed [COV_W-1:0] sat_cov(wide_t x);
    if (x > wide_t'(64'sd2147483647))        return 32'sh7fffffff;
    else if (x < -wide_t'(64'sd2147483648))  return 32'sh80000000;
    else                                     return x[COV_W-1:0];
  endfunction

  function automatic logic [CHI2_W-1:0] sat_chi2(wide_t x);
    if (x > wide_t'(2**CHI2_W - 1)) return '1;
    else                            return x[CHI2_W-1:0];
  endfunction

  // Residual and prediction covariance of one plane.
  function automatic plane_t plane_pre(logic signed [15:0] h,
                                       logic signed [PAR_W-1:0] a,
                                       logic signed [PAR_W-1:0] b,
                                       logic signed [31:0] m,
                                       cov2_t c);
    plane_t p;
    wide_t  pred;
    pred  = wide_t'(b) + ((wide_t'(h) * wide_t'(a)) >>> H_SHIFT);
    p.res = 32'(wide_t'(m) - pred);
    p.hca = hc_t'(((wide_t'(h) * wide_t'(c.aa)) >>> H_SHIFT) + wide_t'(c.ab));
    p.hcb = hc_t'(((wide_t'(h) * wide_t'(c.ab)) >>> H_SHIFT) + wide_t'(c.bb));
    return p;
  endfunction

  function automatic logic [31:0] plane_s(logic signed [15:0] h, plane_t p, wide_t v);
    wide_t s;
    s = v + ((wide_t'(h) * wide_t'(p.hca)) >>> H_SHIFT) + wide_t'(p.hcb);
    if (s < 1)                       return 32'd1;
    else if (s > wide_t'(32'hffffffff)) return 32'hffffffff;
    else                             return s[31:0];
  endfunction

  // ---------------- stage 1: residuals, prediction covariances ------------
  ctx_t               c1;
  logic               v1, v2, v3;
  logic [31:0]        s_rphi, s_rz;
  logic signed [15:0] h1_rphi, h1_rz;
  wide_t              v1_rphi, v1_rz;

  always_comb begin
    automatic wide_t ms;
    h1_rphi = -$signed({2'b00, in_stub.r});
    h1_rz   =  $signed({2'b00, in_stub.r});
    ms      = ((in_state.inv2r < 0 ? -wide_t'(in_state.inv2r) : wide_t'(in_state.inv2r))
               * MS_K) >>> 17;
    v1_rphi = wide_t'(V_PHI[int'(in_stub.layer) < NLAYER ? int'(in_stub.layer) : 0]) + ms * ms;
    v1_rz   = in_stub.ps ? wide_t'(V_Z_PS) : wide_t'(V_Z_2S);
  end

  logic signed [15:0] h2_rphi, h2_rz;
  wide_t              v2_rphi, v2_rz;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end

  always_ff @(posedge clk) begin
    c1.s      <= in_state;
    c1.layer  <= in_stub.layer;
    c1.p_rphi <= plane_pre(h1_rphi, in_state.inv2r, in_state.phi0,
                           32'(in_stub.phi), in_state.c_rphi);
    c1.p_rz   <= plane_pre(h1_rz, in_state.tanl, in_state.z0,
                           32'(in_stub.z), in_state.c_rz);
    h2_rphi   <= h1_rphi;
    h2_rz     <= h1_rz;
    v2_rphi   <= v1_rphi;
    v2_rz     <= v1_rz;
  end

  // ---------------- stage 2: residual variances --------------------------
  ctx_t c2;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v2 <= 1'b0;
    else        v2 <= v1;
  end
  always_ff @(posedge clk) begin
    c2.s      <= c1.s;
    c2.layer  <= c1.layer;
    c2.p_rphi <= c1.p_rphi;
    c2.p_rz   <= c1.p_rz;
    s_rphi    <= plane_s(h2_rphi, c1.p_rphi, v2_rphi);
    s_rz      <= plane_s(h2_rz,   c1.p_rz,   v2_rz);
  end

  // ---------------- reciprocal, context delayed alongside ----------------
  logic [RB:0] q_rphi, q_rz;
  kf_recip #(.DW(32), .RB(RB), .BPS(BPS)) u_recip_rphi (.clk, .d(s_rphi), .q(q_rphi));
  kf_recip #(.DW(32), .RB(RB), .BPS(BPS)) u_recip_rz   (.clk, .d(s_rz),   .q(q_rz));

  ctx_t cd [DIV_STAGES+1];
  logic vd [DIV_STAGES+1];
  assign cd[0] = c2;
  assign vd[0] = v2;
  for (genvar i = 0; i < DIV_STAGES; i++) begin : g_ctx
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) vd[i+1] <= 1'b0;
      else        vd[i+1] <= vd[i];
    end
    always_ff @(posedge clk) begin
      cd[i+1].s      <= cd[i].s;
      cd[i+1].layer  <= cd[i].layer;
      cd[i+1].p_rphi <= cd[i].p_rphi;
      cd[i+1].p_rz   <= cd[i].p_rz;
    end
  end

  // ---------------- stage 3: gains and chi2 increments -------------------
  ctx_t  c3;
  wide_t ka_rphi, kb_rphi, ka_rz, kb_rz, dchi_rphi, dchi_rz;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v3 <= 1'b0;
    else        v3 <= vd[DIV_STAGES];
  end
  always_ff @(posedge clk) begin
    automatic ctx_t x = cd[DIV_STAGES];
    c3.s      <= x.s;
    c3.layer  <= x.layer;
    c3.p_rphi <= x.p_rphi;
    c3.p_rz   <= x.p_rz;
    ka_rphi   <= (wide_t'(x.p_rphi.hca) * wide_t'({1'b0, q_rphi})) >>> (RB - K_FRAC);
    kb_rphi   <= (wide_t'(x.p_rphi.hcb) * wide_t'({1'b0, q_rphi})) >>> (RB - K_FRAC);
    ka_rz     <= (wide_t'(x.p_rz.hca)   * wide_t'({1'b0, q_rz}))   >>> (RB - K_FRAC);
    kb_rz     <= (wide_t'(x.p_rz.hcb)   * wide_t'({1'b0, q_rz}))   >>> (RB - K_FRAC);
    dchi_rphi <= (wide_t'(x.p_rphi.res) * wide_t'(x.p_rphi.res) * wide_t'({1'b0, q_rphi}))
                 >>> (RB - CHI2_FRAC);
    dchi_rz   <= (wide_t'(x.p_rz.res) * wide_t'(x.p_rz.res) * wide_t'({1'b0, q_rz}))
                 >>> (RB - CHI2_FRAC);
  end

  // ---------------- stage 4: new state and covariance --------------------
  state_t s4;
  logic   v4;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v4 <= 1'b0;
    else        v4 <= v3;
  end
  always_ff @(posedge clk) begin
    automatic state_t n = c3.s;
    n.nused     = c3.s.nused + 1'b1;
    n.lmask     = c3.s.lmask | (NLAYER'(1) << c3.layer);
    n.inv2r     = sat_par(wide_t'(c3.s.inv2r) + ((ka_rphi * wide_t'(c3.p_rphi.res)) >>> K_FRAC));
    n.phi0      = sat_par(wide_t'(c3.s.phi0)  + ((kb_rphi * wide_t'(c3.p_rphi.res)) >>> K_FRAC));
    n.tanl      = sat_par(wide_t'(c3.s.tanl)  + ((ka_rz   * wide_t'(c3.p_rz.res))   >>> K_FRAC));
    n.z0        = sat_par(wide_t'(c3.s.z0)    + ((kb_rz   * wide_t'(c3.p_rz.res))   >>> K_FRAC));
    n.c_rphi.aa = sat_cov(wide_t'(c3.s.c_rphi.aa) - ((ka_rphi * wide_t'(c3.p_rphi.hca)) >>> K_FRAC));
    n.c_rphi.ab = sat_cov(wide_t'(c3.s.c_rphi.ab) - ((ka_rphi * wide_t'(c3.p_rphi.hcb)) >>> K_FRAC));
    n.c_rphi.bb = sat_cov(wide_t'(c3.s.c_rphi.bb) - ((kb_rphi * wide_t'(c3.p_rphi.hcb)) >>> K_FRAC));
    n.c_rz.aa   = sat_cov(wide_t'(c3.s.c_rz.aa)   - ((ka_rz   * wide_t'(c3.p_rz.hca))   >>> K_FRAC));
    n.c_rz.ab   = sat_cov(wide_t'(c3.s.c_rz.ab)   - ((ka_rz   * wide_t'(c3.p_rz.hcb))   >>> K_FRAC));
    n.c_rz.bb   = sat_cov(wide_t'(c3.s.c_rz.bb)   - ((kb_rz   * wide_t'(c3.p_rz.hcb))   >>> K_FRAC));
    n.chi2_rphi = sat_chi2(wide_t'(c3.s.chi2_rphi) + dchi_rphi);
    n.chi2_rz   = sat_chi2(wide_t'(c3.s.chi2_rz)   + dchi_rz);
    s4 <= n;
  end

  // ---------------- delay line up to LATENCY -----------------------------
  logic   pv [PAD+1];
  state_t ps [PAD+1];
  assign pv[0] = v4;
  assign ps[0] = s4;
  for (genvar i = 0; i < PAD; i++) begin : g_pad
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) pv[i+1] <= 1'b0;
      else        pv[i+1] <= pv[i];
    end
    always_ff @(posedge clk) ps[i+1] <= ps[i];
  end
  assign out_valid = pv[PAD];
  assign out_state = ps[PAD];

  always_comb begin
    busy = v1 || v2 || v3 || v4;
    for (int i = 1; i <= DIV_STAGES; i++) busy |= vd[i];
    for (int i = 1; i <= PAD; i++)        busy |= pv[i];
  end

  initial begin
    if (PAD < 0) $error("kf_state_updater: LATENCY must be at least %0d", MIN_LATENCY);
  end
endmodule
