// track_fit_chain: duplicate removal followed by one Kalman Filter worker,
// the top of this design.
//
// Track candidates of one event (a seed word and its matched stubs per
// candidate, the last word flagged eoe) first pass the duplicate merger,
// which folds candidates sharing stubs in three or more layers into one and
// renumbers the survivors. The merged event then goes to the KF worker,
// which fits every candidate and emits one track per candidate that reached
// four or more stubs. In the paper's system the merger sits at the end of
// the tracklet pattern recognition and the KF fit follows; the paper runs
// many workers in parallel behind a distribution stage, while this top has
// one of each (a single-worker slice of the track builder).
//
// Interface and timing: in_valid/in_ready/in_word is a valid-ready stream.
// The merger takes a whole event before sending it on, so an event's first
// word reaches the worker only after the event's last word has entered and
// been compared; the worker's latency limit starts from that first word.
// out_valid/out_track carry tracks, ev_done pulses after each event's last
// track. stats are the worker's counters; merged and merge_dropped count
// candidates folded into another and candidates lost for lack of room.
module track_fit_chain
  import kf_pkg::*;
#(
  parameter int MIN_SHARED   = 3,
  parameter int TRUNC_CYCLES = 1280,
  parameter int UPD_LATENCY  = 46,
  parameter int CHI2_CUT     = 160
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  output logic        in_ready,
  input  in_word_t    in_word,
  output logic        out_valid,
  output track_t      out_track,
  output logic        ev_done,
  output kf_stats_t   stats,
  output logic [15:0] merged,
  output logic [15:0] merge_dropped
);
  logic     mg_valid, mg_ready;
  in_word_t mg_word;

  dup_merger #(.MIN_SHARED(MIN_SHARED)) u_merge (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_word,
    .out_valid(mg_valid), .out_ready(mg_ready), .out_word(mg_word),
    .merged, .dropped(merge_dropped)
  );

  kf_worker #(
    .TRUNC_CYCLES(TRUNC_CYCLES), .UPD_LATENCY(UPD_LATENCY), .CHI2_CUT(CHI2_CUT)
  ) u_worker (
    .clk, .rst_n,
    .in_valid(mg_valid), .in_ready(mg_ready), .in_word(mg_word),
    .out_valid, .out_track, .ev_done, .stats
  );
endmodule
