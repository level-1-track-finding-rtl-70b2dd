// kf_stub_state_associator: pairs each KF state with the stubs it may take next.
//
// Stubs arrive through FIFO 1 and are drained, one per cycle, into a stub
// store addressed by (candidate slot, stub index). Upstream delivers each
// candidate's matched stubs in order of increasing radius, so the stub index
// is the radius order the paper asks the associator to follow.
//
// A state carries nxt, the first stub index it has not yet considered. The
// associator takes one state from the state control and then, one stub per
// clock cycle, emits (state, stub) pairs for stub nxt, nxt+1, ... up to the
// candidate's last stub, each pair carrying nxt = index + 1. A state thus
// branches into every way of continuing with a later stub, so that all
// combinations of the matched stubs are tried in increasing radius; the
// state filter later keeps the good ones. Stubs in a layer the state already
// uses are skipped. If a stub has not reached the store yet, the associator
// waits for it (stub_wait). The stub store and the branching scheme are this
// design's choices; the paper only states the association in radius order.
//
// Interface: in_valid/in_ready/in_state from the state control; FIFO 1 read
// side (f1_empty, f1_dout, f1_pop); out_valid/out_state/out_stub towards the
// state updater, registered, no back-pressure. ev_start clears the store and
// abandons the current state; ev is the current event tag.
module kf_stub_state_associator
  import kf_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  logic     ev,
  input  logic     ev_start,
  input  logic     f1_empty,
  input  ev_stub_t f1_dout,
  output logic     f1_pop,
  input  logic     in_valid,
  output logic     in_ready,
  input  state_t   in_state,
  output logic     out_valid,
  output state_t   out_state,
  output stub_t    out_stub,
  output logic     busy,
  output logic     stub_wait
);
  stub_t           store [MAX_CAND*MAX_STUBS];
  logic [IDX_W:0]  loaded [MAX_CAND];
  state_t          cur;
  logic [IDX_W:0]  j;
  stub_t           st;
  logic            have_stub, in_range;

  assign f1_pop   = !f1_empty;
  assign in_ready = !busy && !ev_start;

  // Stub store write side.
  always_ff @(posedge clk) begin
    if (!f1_empty && f1_dout.ev == ev && !ev_start)
      store[{f1_dout.stub.slot, f1_dout.stub.idx}] <= f1_dout.stub;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < MAX_CAND; i++) loaded[i] <= '0;
    end else if (ev_start) begin
      for (int i = 0; i < MAX_CAND; i++) loaded[i] <= '0;
    end else if (!f1_empty && f1_dout.ev == ev) begin
      loaded[f1_dout.stub.slot] <= {1'b0, f1_dout.stub.idx} + 1'b1;
    end
  end

  // Association side.
  always_comb begin
    in_range  = j < cur.nstubs;
    have_stub = in_range && (j < loaded[cur.slot]);
    st        = store[{cur.slot, j[IDX_W-1:0]}];
    stub_wait = busy && in_range && !have_stub;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      out_valid <= 1'b0;
      j         <= '0;
    end else begin
      out_valid <= 1'b0;
      if (ev_start) begin
        busy <= 1'b0;
      end else if (!busy) begin
        if (in_valid) begin
          busy <= 1'b1;
          j    <= in_state.nxt;
        end
      end else if (!in_range) begin
        busy <= 1'b0;
      end else if (have_stub) begin
        j <= j + 1'b1;
        if (!cur.lmask[st.layer]) out_valid <= 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (!busy && in_valid && !ev_start) cur <= in_state;
    if (busy && have_stub) begin
      out_state     <= cur;
      out_state.nxt <= j + 1'b1;
      out_stub      <= st;
    end
  end
endmodule
