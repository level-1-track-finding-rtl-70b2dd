// kf_state_control: chooses which state the stub-state associator works on next.
//
// Two sources feed it, as in the paper's worker diagram: partially worked
// states returning through FIFO 3 and fresh seeds from FIFO 2. Returning
// states have priority (this design's choice): they are older, finishing them
// frees FIFO 3, and the loop through the state updater can never be blocked
// by new work. States and seeds whose event tag differs from the current
// event (left over after an event was cut at the latency limit) are popped
// and discarded without being forwarded.
//
// Interface: show-ahead reads of both FIFOs (empty/dout, pop); out_valid/
// out_ready/out_state towards the associator, combinational in both
// directions. resumed pulses when a FIFO 3 state is taken while a seed waits.
module kf_state_control
  import kf_pkg::*;
(
  input  logic   ev,           // current event tag
  input  logic   f3_empty,
  input  state_t f3_dout,
  output logic   f3_pop,
  input  logic   f2_empty,
  input  state_t f2_dout,
  output logic   f2_pop,
  output logic   out_valid,
  input  logic   out_ready,
  output state_t out_state,
  output logic   resumed,
  output logic   dropped
);
  logic f3_stale, f2_stale;

  always_comb begin
    f3_stale  = !f3_empty && (f3_dout.ev != ev);
    f2_stale  = !f2_empty && (f2_dout.ev != ev);
    f3_pop    = 1'b0;
    f2_pop    = 1'b0;
    out_valid = 1'b0;
    out_state = f3_dout;
    resumed   = 1'b0;
    dropped   = 1'b0;
    if (f3_stale) begin
      f3_pop  = 1'b1;                // flush old state, forward nothing
      dropped = 1'b1;
    end else if (!f3_empty) begin
      out_valid = 1'b1;
      out_state = f3_dout;
      f3_pop    = out_ready;
      resumed   = out_ready && !f2_empty;
    end else if (f2_stale) begin
      f2_pop  = 1'b1;
      dropped = 1'b1;
    end else if (!f2_empty) begin
      out_valid = 1'b1;
      out_state = f2_dout;
      f2_pop    = out_ready;
    end
  end
endmodule
