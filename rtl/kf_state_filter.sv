// kf_state_filter: decides the fate of every state leaving the state updater.
//
// A state whose chi2 (r-phi plus r-z) exceeds CHI2_CUT per added stub is
// dropped. A surviving state with at least MIN_FIT stubs (seed stubs
// included) is a possible final track and is offered to the state
// accumulator. A surviving state that has fewer than MAX_FIT stubs and still
// has untried stubs goes back through FIFO 3 for another pass; if FIFO 3 is
// full it is lost and counted (fifo3_drop). The paper names the filter and
// gives the four-to-six-stub range; the chi2 cut value and the order of
// these tests are this design's choices.
//
// Timing: one register stage. in_valid/in_state from the updater;
// acc_valid/acc_state and f3_push/f3_state leave one cycle later.
module kf_state_filter
  import kf_pkg::*;
#(
  parameter int CHI2_CUT = 160   // per added stub, CHI2_FRAC fractional bits (10.0)
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   in_valid,
  input  state_t in_state,
  input  logic   f3_full,
  output logic   f3_push,
  output state_t f3_state,
  output logic   acc_valid,
  output state_t acc_state,
  output logic   chi2_drop,
  output logic   fifo3_drop,
  output logic   busy
);
  logic   r_valid, r_more, r_final;
  state_t r_state;
  logic   pass, more, final_ok;

  always_comb begin
    automatic int unsigned added = int'(in_state.nused) - SEED_STUBS;
    automatic int unsigned chi2  = int'(in_state.chi2_rphi) + int'(in_state.chi2_rz);
    pass     = chi2 <= CHI2_CUT * added;
    final_ok = pass && (int'(in_state.nused) >= MIN_FIT);
    more     = pass && (int'(in_state.nused) < MAX_FIT) && (in_state.nxt < in_state.nstubs);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_valid   <= 1'b0;
      r_more    <= 1'b0;
      r_final   <= 1'b0;
      chi2_drop <= 1'b0;
    end else begin
      r_valid   <= in_valid;
      r_more    <= in_valid && more;
      r_final   <= in_valid && final_ok;
      chi2_drop <= in_valid && !pass;
    end
  end

  always_ff @(posedge clk) begin
    if (in_valid) r_state <= in_state;
  end

  assign f3_push    = r_more && !f3_full;
  assign fifo3_drop = r_more && f3_full;
  assign f3_state   = r_state;
  assign acc_valid  = r_final;
  assign acc_state  = r_state;
  assign busy       = r_valid;
endmodule
