// kf_recip: pipelined reciprocal, q = floor(2^RB / d), for the KF state updater.
//
// Restoring long division of the constant 2^RB by d, BPS quotient bits per
// pipeline stage, so the result appears ceil((RB+1)/BPS) cycles after d is
// presented, and a new d can enter every cycle. d must be at least 1 (the
// caller clamps it). Used once per measurement plane to form 1/S, where S
// is the variance of the residual; the gains and chi2 are then products
// with q, so no other divider is needed. This is this design's own
// arithmetic choice; the paper does not describe the updater's insides.
module kf_recip #(
  parameter int DW  = 32,   // divisor width (unsigned)
  parameter int RB  = 48,   // q = 2^RB / d
  parameter int BPS = 2     // quotient bits resolved per stage
) (
  input  logic          clk,
  input  logic [DW-1:0] d,
  output logic [RB:0]   q
);
  localparam int QW     = RB + 1;
  localparam int NSTAGE = (QW + BPS - 1) / BPS;
  localparam int QPAD   = NSTAGE * BPS;   // padded quotient width

  logic [DW:0]     rem_s [NSTAGE+1];
  logic [QPAD-1:0] q_s   [NSTAGE+1];
  logic [DW-1:0]   d_s   [NSTAGE+1];

  assign rem_s[0] = '0;
  assign q_s[0]   = '0;
  assign d_s[0]   = d;

  for (genvar s = 0; s < NSTAGE; s++) begin : g_stage
    logic [DW:0]     rem_n;
    logic [QPAD-1:0] q_n;
    always_comb begin
      rem_n = rem_s[s];
      q_n   = q_s[s];
      for (int b = 0; b < BPS; b++) begin
        // quotient bit index, counted from the top of the padded quotient;
        // the dividend's only set bit is bit RB
        automatic int qi = QPAD - 1 - (s * BPS + b);
        rem_n = {rem_n[DW-1:0], (qi == RB)};
        if (rem_n >= {1'b0, d_s[s]}) begin
          rem_n = rem_n - {1'b0, d_s[s]};
          q_n[qi] = 1'b1;
        end
      end
    end
    always_ff @(posedge clk) begin
      rem_s[s+1] <= rem_n;
      q_s[s+1]   <= q_n;
      d_s[s+1]   <= d_s[s];
    end
  end

  assign q = q_s[NSTAGE][RB:0];
endmodule
