// kf_seed_creator: turns a tracklet seed into the initial Kalman filter state.
//
// Each track candidate enters the worker headed by its tracklet helix
// parameters (inv2R, phi0, tanLambda, z0), computed upstream from a pair of
// stubs in one of the seven seeding layer pairs. Following the paper, those
// parameters seed the KF state and covariance, and the two seeding stubs are
// not refitted: the new state starts with two stubs counted as used and with
// the two seeding layers marked, so the associator will not add a second stub
// in either of them. The initial covariance is diagonal; its four variances
// are parameters of this design (the paper gives no values), chosen to be a
// loose version of a two-stub tracklet's resolution.
//
// Interface: seed_valid/seed with the event tag ev; one cycle later
// state_valid/state is the seed state for FIFO 2. No back-pressure: the
// worker only offers a seed when FIFO 2 has room for it.
module kf_seed_creator
  import kf_pkg::*;
#(
  parameter logic signed [COV_W-1:0] C0_INV2R = 32'sd2250000,  // sigma 1500 LSB
  parameter logic signed [COV_W-1:0] C0_PHI0  = 32'sd68644,    // sigma 262 LSB (1 mrad)
  parameter logic signed [COV_W-1:0] C0_TANL  = 32'sd1681,     // sigma 41 LSB (0.01)
  parameter logic signed [COV_W-1:0] C0_Z0    = 32'sd2500      // sigma 50 LSB (5 mm)
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   seed_valid,
  input  seed_t  seed,
  input  logic   ev,
  output logic   state_valid,
  output state_t state
);
  state_t s_next;

  always_comb begin
    s_next           = '0;
    s_next.ev        = ev;
    s_next.slot      = seed.slot;
    s_next.nxt       = '0;
    s_next.nstubs    = seed.nstubs;
    s_next.nused     = NUSED_W'(SEED_STUBS);
    s_next.lmask     = seed_layers(seed.stype);
    s_next.inv2r     = seed.inv2r;
    s_next.phi0      = seed.phi0;
    s_next.tanl      = seed.tanl;
    s_next.z0        = seed.z0;
    s_next.c_rphi.aa = C0_INV2R;
    s_next.c_rphi.ab = '0;
    s_next.c_rphi.bb = C0_PHI0;
    s_next.c_rz.aa   = C0_TANL;
    s_next.c_rz.ab   = '0;
    s_next.c_rz.bb   = C0_Z0;
    s_next.chi2_rphi = '0;
    s_next.chi2_rz   = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_valid <= 1'b0;
    else        state_valid <= seed_valid;
  end

  always_ff @(posedge clk) begin
    if (seed_valid) state <= s_next;
  end
endmodule
