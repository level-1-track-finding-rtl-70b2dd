// kf_pkg: shared types and constants of the Kalman Filter (KF) track-fit worker.
//
// A worker receives, per event, a list of track candidates. Each candidate is a
// tracklet seed (helix parameters from a pair of stubs in two seeding layers)
// followed by the stubs that were matched to it in the other layers and disks.
// The worker fits a 4-parameter helix (inv2R, phi0, tanLambda, z0) to each
// candidate by applying the matched stubs one at a time to a Kalman filter.
//
// Fixed-point units (this design's choice):
//   r            unsigned, 0.1 mm per LSB            (14 bits, up to 1.6 m)
//   phi, phi0    signed, 2^-18 rad per LSB           (18 bits, +-0.5 rad: one nonant)
//   z, z0        signed, 0.1 mm per LSB              (16 bits, +-3.2 m)
//   inv2R        signed; predicted phi shift = (r * inv2R) >>> H_SHIFT
//   tanLambda    signed; predicted z shift   = (r * tanL)  >>> H_SHIFT
//   chi2         unsigned, CHI2_FRAC fractional bits, saturating
// Layers are numbered 0..5 for barrel layers L1..L6 and 6..10 for endcap
// disks D1..D5, as in the outer tracker layout of six barrel layers and five
// disks per side.
package kf_pkg;

  localparam int NLAYER     = 11;  // L1-L6, D1-D5
  localparam int MAX_CAND   = 32;  // track candidates per event and worker
  localparam int CAND_W     = $clog2(MAX_CAND);
  localparam int MAX_STUBS  = 8;   // matched stubs stored per candidate
  localparam int IDX_W      = $clog2(MAX_STUBS);
  localparam int NUSED_W    = 3;   // stubs in a fit, seed stubs included (0..7)
  localparam int MIN_FIT    = 4;   // a track has four to six stubs
  localparam int MAX_FIT    = 6;
  localparam int SEED_STUBS = 2;   // tracklet seed stubs, not refitted

  localparam int R_W      = 14;
  localparam int PHI_W    = 18;
  localparam int Z_W      = 16;
  localparam int PAR_W    = 24;
  localparam int COV_W    = 32;
  localparam int CHI2_W   = 20;
  localparam int CHI2_FRAC = 4;
  localparam int H_SHIFT  = 12;

  // Seeding layer pairs: L1L2, L3L4, L5L6, L1D1, L2D1, D1D2, D3D4.
  localparam int NSEEDTYPE = 7;
  typedef logic [2:0] seed_type_t;

  function automatic logic [NLAYER-1:0] seed_layers(seed_type_t t);
    logic [NLAYER-1:0] m;
    m = '0;
    case (t)
      3'd0: begin m[0] = 1'b1; m[1]  = 1'b1; end  // L1L2
      3'd1: begin m[2] = 1'b1; m[3]  = 1'b1; end  // L3L4
      3'd2: begin m[4] = 1'b1; m[5]  = 1'b1; end  // L5L6
      3'd3: begin m[0] = 1'b1; m[6]  = 1'b1; end  // L1D1
      3'd4: begin m[1] = 1'b1; m[6]  = 1'b1; end  // L2D1
      3'd5: begin m[6] = 1'b1; m[7]  = 1'b1; end  // D1D2
      3'd6: begin m[8] = 1'b1; m[9]  = 1'b1; end  // D3D4
      default: m = '0;
    endcase
    return m;
  endfunction

  typedef struct packed {
    logic [CAND_W-1:0]       slot;   // candidate number within the event
    logic [IDX_W-1:0]        idx;    // stub number within the candidate, radius order
    logic [3:0]              layer;  // 0..10
    logic                    ps;     // 1: pixel-strip module, 0: two-strip module
    logic [R_W-1:0]          r;
    logic signed [PHI_W-1:0] phi;
    logic signed [Z_W-1:0]   z;
  } stub_t;

  // Tracklet seed: the header word of a track candidate.
  typedef struct packed {
    logic [CAND_W-1:0]       slot;
    logic [IDX_W:0]          nstubs;   // matched stubs that follow (0..MAX_STUBS)
    seed_type_t              stype;
    logic signed [PAR_W-1:0] inv2r;
    logic signed [PAR_W-1:0] phi0;
    logic signed [PAR_W-1:0] tanl;
    logic signed [PAR_W-1:0] z0;
  } seed_t;

  typedef enum logic { W_STUB = 1'b0, W_SEED = 1'b1 } word_kind_e;

  // One word of the worker's input stream.
  typedef struct packed {
    word_kind_e kind;
    logic       eoe;    // last word of the event
    seed_t      seed;   // valid when kind == W_SEED
    stub_t      stub;   // valid when kind == W_STUB
  } in_word_t;

  // Stub as buffered in FIFO 1: tagged with the event it belongs to.
  typedef struct packed {
    logic  ev;
    stub_t stub;
  } ev_stub_t;

  // Symmetric 2x2 covariance of one (slope, offset) pair.
  typedef struct packed {
    logic signed [COV_W-1:0] aa;
    logic signed [COV_W-1:0] ab;
    logic signed [COV_W-1:0] bb;
  } cov2_t;

  typedef struct packed {
    logic                    ev;       // event tag
    logic [CAND_W-1:0]       slot;
    logic [IDX_W:0]          nxt;      // next stub index to try
    logic [IDX_W:0]          nstubs;   // matched stubs of the candidate
    logic [NUSED_W-1:0]      nused;    // stubs in the fit, seed included
    logic [NLAYER-1:0]       lmask;    // layers already used
    logic signed [PAR_W-1:0] inv2r;
    logic signed [PAR_W-1:0] phi0;
    logic signed [PAR_W-1:0] tanl;
    logic signed [PAR_W-1:0] z0;
    cov2_t                   c_rphi;   // (inv2r, phi0)
    cov2_t                   c_rz;     // (tanl, z0)
    logic [CHI2_W-1:0]       chi2_rphi;
    logic [CHI2_W-1:0]       chi2_rz;
  } state_t;

  typedef struct packed {
    logic [CAND_W-1:0]       slot;
    logic [NUSED_W-1:0]      nused;
    logic [NLAYER-1:0]       lmask;
    logic signed [PAR_W-1:0] inv2r;
    logic signed [PAR_W-1:0] phi0;
    logic signed [PAR_W-1:0] tanl;
    logic signed [PAR_W-1:0] z0;
    logic [CHI2_W-1:0]       chi2_rphi;
    logic [CHI2_W-1:0]       chi2_rz;
  } track_t;

  // Event counters of one worker.
  typedef struct packed {
    logic [15:0] events;
    logic [15:0] truncated;     // events cut at the latency limit
    logic [15:0] fifo3_drops;   // states lost because FIFO 3 was full
    logic [15:0] chi2_drops;    // states rejected by the chi2 cut
    logic [15:0] in_stalls;     // cycles input was refused
    logic [15:0] stub_waits;    // cycles a state waited for its stubs
    logic [15:0] resumed;       // states taken from FIFO 3 ahead of a waiting seed
  } kf_stats_t;

  function automatic track_t state_to_track(state_t s);
    track_t t;
    t.slot = s.slot;       t.nused = s.nused;   t.lmask = s.lmask;
    t.inv2r = s.inv2r;     t.phi0 = s.phi0;     t.tanl = s.tanl;   t.z0 = s.z0;
    t.chi2_rphi = s.chi2_rphi; t.chi2_rz = s.chi2_rz;
    return t;
  endfunction

endpackage
