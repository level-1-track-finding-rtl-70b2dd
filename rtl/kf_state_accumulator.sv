// kf_state_accumulator: keeps the best fitted state of each track candidate.
//
// Every state the filter accepts as a possible track is compared with the
// best one stored so far for its candidate slot. The state with more stubs
// wins; between states with the same number of stubs the smaller chi2 wins.
// The paper says the choice is made "primarily based on the chi2"; here the
// chi2 decides among fits of equal length, because every state reaching the
// accumulator has already passed the filter's chi2-per-stub cut, and
// comparing chi2 per degree of freedom across lengths was found to discard
// good stubs about as often as bad ones. States carrying another event's
// tag are ignored.
//
// When flush is pulsed (all work for the event done, or the event's latency
// limit reached) the accumulator walks the slots, one per clock cycle, and
// emits one track per candidate that has a stored state, then clears it;
// done pulses after the last slot. Inputs arriving during the walk are
// ignored. Slot storage is a register array; output is registered.
module kf_state_accumulator
  import kf_pkg::*;
(
  input  logic   clk,
  input  logic   rst_n,
  input  logic   ev,
  input  logic   in_valid,
  input  state_t in_state,
  input  logic   flush,
  output logic   out_valid,
  output track_t out_track,
  output logic   flushing,
  output logic   done
);
  track_t            best  [MAX_CAND];
  logic [MAX_CAND-1:0] have;
  logic [CAND_W:0]   walk;
  logic              better;
  track_t            cur;

  function automatic logic [CHI2_W:0] chi2_sum(track_t t);
    return {1'b0, t.chi2_rphi} + {1'b0, t.chi2_rz};
  endfunction

  always_comb begin
    cur = best[in_state.slot];
    better = !have[in_state.slot] || (in_state.nused > cur.nused) ||
             ((in_state.nused == cur.nused) &&
              (chi2_sum(state_to_track(in_state)) < chi2_sum(cur)));
  end

  wire accept = in_valid && !flushing && (in_state.ev == ev);

  always_ff @(posedge clk) begin
    if (accept && better) best[in_state.slot] <= state_to_track(in_state);
    if (flushing && !walk[CAND_W]) out_track <= best[walk[CAND_W-1:0]];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have      <= '0;
      walk      <= '0;
      flushing  <= 1'b0;
      out_valid <= 1'b0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      if (flushing) begin
        if (walk[CAND_W]) begin
          flushing <= 1'b0;
          done     <= 1'b1;
        end else begin
          out_valid <= have[walk[CAND_W-1:0]];
          have[walk[CAND_W-1:0]] <= 1'b0;
          walk <= walk + 1'b1;
        end
      end else if (flush) begin
        flushing <= 1'b1;
        walk     <= '0;
      end else if (accept && better) begin
        have[in_state.slot] <= 1'b1;
      end
    end
  end
endmodule
