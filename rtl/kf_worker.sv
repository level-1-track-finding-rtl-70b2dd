// kf_worker: one Kalman Filter track-fitting worker.
//
// The worker fits, one event at a time, the track candidates that tracklet
// seeding and stub matching produced. Its input is a stream of words: for
// each candidate a seed word with the tracklet helix parameters, and the
// candidate's matched stubs in increasing radius; the last word of the event
// carries eoe. Its output is one fitted track per candidate that reached at
// least four stubs, with 4 helix parameters, chi2 and the layers used.
//
// Data flow, as in the paper's block diagram of a worker:
//   stubs in --> FIFO 1 ------------------> stub-state associator --> state updater
//   seeds in --> seed creator --> FIFO 2 --> state control --^            |
//                                 FIFO 3 --> state control          state filter
//                                   ^------------------------------------|--> state accumulator --> tracks out
// The state control feeds the associator from FIFO 3 (states that can take
// more stubs) before FIFO 2 (new seeds). The associator pairs a state with
// each of its candidate's later stubs, one pair per clock; the updater (46
// cycles, fully pipelined) applies the stub; the filter drops bad states,
// loops continuing ones back through FIFO 3 and hands possible tracks to the
// accumulator, which keeps the best state of each candidate.
//
// Event control (this design's choice): after the eoe word the worker stops
// taking input and waits until every FIFO and pipeline stage is empty, or
// until TRUNC_CYCLES cycles have passed since the event's first word. It
// then has the accumulator emit the event's tracks, clears the FIFOs, flips
// the event tag so any state still in flight is discarded, and takes the
// next event. An event cut this way is counted as truncated, the fixed
// latency cut-off under which the paper quotes its efficiencies. The
// default limit, 1280 cycles, is the paper's 4 us track-finding budget at
// the worker's 320 MHz clock.
//
// Interface: in_valid/in_ready/in_word (valid-ready handshake); out_valid/
// out_track, one track per cycle at most; ev_done pulses after an event's
// last track; stats counts events and the internal mechanisms.
module kf_worker
  import kf_pkg::*;
#(
  parameter int TRUNC_CYCLES = 1280,
  parameter int F1_DEPTH     = 64,
  parameter int F2_DEPTH     = 32,
  parameter int F3_DEPTH     = 64,
  parameter int UPD_LATENCY  = 46,
  parameter int CHI2_CUT     = 160
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  output logic      in_ready,
  input  in_word_t  in_word,
  output logic      out_valid,
  output track_t    out_track,
  output logic      ev_done,
  output kf_stats_t stats
);
  typedef enum logic [1:0] { S_RUN, S_DRAIN, S_FLUSH } ctl_e;
  ctl_e ctl;
  logic ev, ev_start, flush;
  logic [$clog2(TRUNC_CYCLES+1)-1:0] timer;
  logic started;

  // FIFO 1: stubs
  logic     f1_push, f1_pop, f1_empty, f1_full, f1_af;
  ev_stub_t f1_din, f1_dout;
  logic [$clog2(F1_DEPTH):0] f1_count;
  // FIFO 2: seeds
  logic     f2_push, f2_pop, f2_empty, f2_full, f2_af;
  state_t   f2_din, f2_dout;
  logic [$clog2(F2_DEPTH):0] f2_count;
  // FIFO 3: partially worked states
  logic     f3_push, f3_pop, f3_empty, f3_full, f3_af;
  state_t   f3_din, f3_dout;
  logic [$clog2(F3_DEPTH):0] f3_count;

  logic   sc_valid, sc_ready, resumed, ctl_dropped;
  state_t sc_state;
  logic   as_valid, as_busy, stub_wait;
  state_t as_state;
  stub_t  as_stub;
  logic   up_valid, up_busy;
  state_t up_state;
  logic   acc_valid, chi2_drop, fifo3_drop, flt_busy;
  state_t acc_state;
  logic   acc_flushing, acc_done;

  wire accept   = in_valid && in_ready;
  wire is_seed  = in_word.kind == W_SEED;
  wire fifo_clr = ev_start;

  assign in_ready = (ctl == S_RUN) && !f1_af && !f2_af;
  assign f1_push  = accept && !is_seed;
  assign f1_din   = '{ev: ev, stub: in_word.stub};

  kf_fifo #(.T(ev_stub_t), .DEPTH(F1_DEPTH)) u_fifo1 (
    .clk, .rst_n, .clear(fifo_clr), .push(f1_push), .din(f1_din), .pop(f1_pop),
    .dout(f1_dout), .empty(f1_empty), .full(f1_full), .almost_full(f1_af), .count(f1_count));

  kf_seed_creator u_seed (
    .clk, .rst_n, .seed_valid(accept && is_seed), .seed(in_word.seed), .ev,
    .state_valid(f2_push), .state(f2_din));

  kf_fifo #(.T(state_t), .DEPTH(F2_DEPTH)) u_fifo2 (
    .clk, .rst_n, .clear(fifo_clr), .push(f2_push), .din(f2_din), .pop(f2_pop),
    .dout(f2_dout), .empty(f2_empty), .full(f2_full), .almost_full(f2_af), .count(f2_count));

  kf_fifo #(.T(state_t), .DEPTH(F3_DEPTH)) u_fifo3 (
    .clk, .rst_n, .clear(fifo_clr), .push(f3_push), .din(f3_din), .pop(f3_pop),
    .dout(f3_dout), .empty(f3_empty), .full(f3_full), .almost_full(f3_af), .count(f3_count));

  kf_state_control u_ctl (
    .ev, .f3_empty, .f3_dout, .f3_pop, .f2_empty, .f2_dout, .f2_pop,
    .out_valid(sc_valid), .out_ready(sc_ready), .out_state(sc_state),
    .resumed, .dropped(ctl_dropped));

  kf_stub_state_associator u_assoc (
    .clk, .rst_n, .ev, .ev_start, .f1_empty, .f1_dout, .f1_pop,
    .in_valid(sc_valid), .in_ready(sc_ready), .in_state(sc_state),
    .out_valid(as_valid), .out_state(as_state), .out_stub(as_stub),
    .busy(as_busy), .stub_wait);

  kf_state_updater #(.LATENCY(UPD_LATENCY)) u_upd (
    .clk, .rst_n, .in_valid(as_valid), .in_state(as_state), .in_stub(as_stub),
    .out_valid(up_valid), .out_state(up_state), .busy(up_busy));

  kf_state_filter #(.CHI2_CUT(CHI2_CUT)) u_filter (
    .clk, .rst_n, .in_valid(up_valid), .in_state(up_state), .f3_full,
    .f3_push, .f3_state(f3_din), .acc_valid, .acc_state,
    .chi2_drop, .fifo3_drop, .busy(flt_busy));

  kf_state_accumulator u_acc (
    .clk, .rst_n, .ev, .in_valid(acc_valid), .in_state(acc_state), .flush,
    .out_valid, .out_track, .flushing(acc_flushing), .done(acc_done));

  // ---------------- event control ----------------------------------------
  wire idle = f1_empty && f2_empty && f3_empty && !f2_push && !as_busy &&
              !as_valid && !up_busy && !up_valid && !flt_busy;
  wire timeout = timer >= ($bits(timer))'(TRUNC_CYCLES);

  always_comb begin
    flush    = (ctl == S_DRAIN) && (idle || timeout);
    ev_start = flush;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ctl     <= S_RUN;
      ev      <= 1'b0;
      timer   <= '0;
      started <= 1'b0;
      ev_done <= 1'b0;
      stats   <= '0;
    end else begin
      ev_done <= 1'b0;
      if (started && !timeout) timer <= timer + 1'b1;
      if (in_valid && !in_ready) stats.in_stalls <= stats.in_stalls + 1'b1;
      if (stub_wait)  stats.stub_waits  <= stats.stub_waits + 1'b1;
      if (resumed)    stats.resumed     <= stats.resumed + 1'b1;
      if (chi2_drop)  stats.chi2_drops  <= stats.chi2_drops + 1'b1;
      if (fifo3_drop) stats.fifo3_drops <= stats.fifo3_drops + 1'b1;
      case (ctl)
        S_RUN: begin
          if (accept) started <= 1'b1;
          if (accept && in_word.eoe) ctl <= S_DRAIN;
        end
        S_DRAIN: begin
          if (flush) begin
            ctl <= S_FLUSH;
            ev  <= ~ev;
            if (!idle) stats.truncated <= stats.truncated + 1'b1;
          end
        end
        default: begin  // S_FLUSH
          if (acc_done) begin
            ctl     <= S_RUN;
            started <= 1'b0;
            timer   <= '0;
            ev_done <= 1'b1;
            stats.events <= stats.events + 1'b1;
          end
        end
      endcase
    end
  end

  // The seed creator has one register stage: FIFO 2 must never be pushed full.
  a_f2_room: assert property (@(posedge clk) disable iff (!rst_n) !(f2_push && f2_full));
endmodule
