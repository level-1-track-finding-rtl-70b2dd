// tb_track_fit_chain: end-to-end test of the top (duplicate merger followed
// by one KF worker) at its default parameters.
//
// Synthetic tracks are generated from random true helix parameters with the
// same linear hit model the worker fits (phi = phi0 - r*inv2R/2^12,
// z = z0 + r*tanL/2^12), with small hit noise. Each candidate is a seed in
// L1L2 whose parameters are the truth plus a deliberate error, followed by
// stubs in L3..L6 in increasing radius.
//   Event 1: clean candidates, plus a duplicate of every other candidate (a
//            different seed with the same L3, L4 and L5 stubs, so exactly
//            three shared layers). Duplicates must be merged away: every
//            original candidate must yield one track using all six stubs,
//            close to the truth and closer than the seed, and no other
//            track may appear. The event must take at least four updater
//            latencies.
//   Event 2: each candidate also gets a wrong stub in a second L4 position.
//            The chosen track must not use it and the chi2 cut must fire.
//   Event 3: a heavy event, 32 candidates with eight stubs each (two per
//            layer). It must stall the input, overflow FIFO 3 and hit the
//            latency limit (truncation), and the chain must still close the
//            event and go on to the next one.
//   Event 4: clean with duplicates again, after the truncation.
// Each mechanism (merge, input stall, FIFO 3 priority, chi2 drop, FIFO 3
// overflow, truncation) is counted and must have happened. The worker's
// wait for a stub that has not yet arrived is reported but not required:
// the merger always sends a candidate's stubs directly behind its seed, and
// the stub path into the associator is then never slower than the seed
// path, so through this top the wait does not occur (the worker's and the
// associator's own testbenches, which send seeds ahead of stubs, cover it).
module tb_track_fit_chain;
  import kf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready;
  in_word_t in_word = '0;
  logic out_valid, ev_done;
  track_t out_track;
  kf_stats_t stats;
  logic [15:0] merged, merge_dropped;
  int checks = 0, failures = 0;
  int ndup = 0;

  track_fit_chain dut (.*);

  always #1.5625ns clk = ~clk;   // 320 MHz

  localparam int RADII [4] = '{5100, 6900, 8800, 11000};  // L3..L6, 0.1 mm
  localparam int R_L1 = 2300, R_L2 = 3600;

  typedef struct {
    int inv2r, phi0, tanl, z0;
  } helix_t;

  // Four sets, indexed by event number modulo 4: later events are offered
  // (and buffered in the merger and the worker's FIFOs) while earlier ones
  // are still being finished.
  helix_t truth [4][MAX_CAND];
  helix_t seedp [4][MAX_CAND];
  track_t got   [4][MAX_CAND];
  bit     have  [4][MAX_CAND];
  int     ntracks [4];
  int     out_ev = 1;               // event whose tracks are being emitted
  longint t_first [8];
  longint cycle = 0;
  always @(posedge clk) cycle++;
  // An event can start in the worker only once the merger has its last word
  // and the worker has closed the previous event: the later of the two
  // times is the reference for the event's duration.
  int     ev_in = 1;
  longint t_prev_done = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (cycle %0d)", what, cycle); end
  endtask

  function automatic int iabs(int x); return x < 0 ? -x : x; endfunction
  function automatic int noise(int amp); return int'($urandom_range(0, 2*amp)) - amp; endfunction

  function automatic int phi_at(helix_t h, int r);
    return h.phi0 + ((-r * h.inv2r) >>> H_SHIFT);
  endfunction
  function automatic int z_at(helix_t h, int r);
    return h.z0 + ((r * h.tanl) >>> H_SHIFT);
  endfunction

  // collect tracks
  always @(negedge clk) begin
    if (out_valid) begin
      ntracks[out_ev % 4]++;
      if (have[out_ev % 4][out_track.slot]) begin
        failures++;
        $display("FAIL two tracks for slot %0d", out_track.slot);
      end
      have[out_ev % 4][out_track.slot] = 1'b1;
      got[out_ev % 4][out_track.slot]  = out_track;
    end
  end

  // Inputs change on the falling edge; a word is taken at the rising edge
  // that follows a falling edge where in_ready was high.
  task automatic send(in_word_t w);
    @(negedge clk);
    in_word  = w;
    in_valid = 1'b1;
    #0.1ns;                       // let in_ready follow the new word
    while (!in_ready) begin @(negedge clk); #0.1ns; end
    @(posedge clk);
    if (w.eoe) begin t_first[ev_in] = cycle; ev_in++; end
  endtask

  task automatic end_input();
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  task automatic make_truth(int e, int n);
    for (int c = 0; c < n; c++) begin
      truth[e][c].inv2r = noise(20000);       // pT above about 3 GeV
      truth[e][c].phi0  = noise(40000);      // hits stay inside the sector
      truth[e][c].tanl  = noise(8000);
      truth[e][c].z0    = noise(600);
      seedp[e][c].inv2r = truth[e][c].inv2r + noise(1500);
      seedp[e][c].phi0  = truth[e][c].phi0  + noise(200);
      seedp[e][c].tanl  = truth[e][c].tanl  + noise(40);
      seedp[e][c].z0    = truth[e][c].z0    + noise(40);
      have[e][c] = 1'b0;
    end
  endtask

  function automatic in_word_t seed_word(int e, int c, int nst, bit eoe);
    in_word_t w = '0;
    w.kind        = W_SEED;
    w.eoe         = eoe;
    w.seed.slot   = CAND_W'(c);
    w.seed.nstubs = (IDX_W+1)'(nst);
    w.seed.stype  = 3'd0;  // L1L2
    w.seed.inv2r  = PAR_W'(seedp[e][c].inv2r);
    w.seed.phi0   = PAR_W'(seedp[e][c].phi0);
    w.seed.tanl   = PAR_W'(seedp[e][c].tanl);
    w.seed.z0     = PAR_W'(seedp[e][c].z0);
    return w;
  endfunction

  function automatic in_word_t stub_word(int c, int idx, int layer, int r, int phi, int z, bit eoe);
    in_word_t w = '0;
    w.kind       = W_STUB;
    w.eoe        = eoe;
    w.stub.slot  = CAND_W'(c);
    w.stub.idx   = IDX_W'(idx);
    w.stub.layer = 4'(layer);
    w.stub.ps    = (layer <= 2);
    w.stub.r     = R_W'(r);
    w.stub.phi   = PHI_W'(phi);
    w.stub.z     = Z_W'(z);
    return w;
  endfunction

  int sphi [4][MAX_CAND][4];
  int sz   [4][MAX_CAND][4];

  task automatic send_stubs(int e, int c, int kind, bit eoe);
    int k = 0;
    for (int l = 0; l < 4; l++) begin
      int r = RADII[l];
      int zn = (l == 0) ? 2 : 20;
      bit last = eoe && (l == 3);
      sphi[e][c][l] = phi_at(truth[e][c], r) + noise(2);
      sz[e][c][l]   = z_at(truth[e][c], r) + noise(zn);
      send(stub_word(c, k, l + 2, r, sphi[e][c][l], sz[e][c][l], last && (kind != 2)));
      k++;
      if (kind == 1 && l == 1) begin
        // wrong stub in the same layer, slightly larger radius
        send(stub_word(c, k, l + 2, r + 10, phi_at(truth[e][c], r) + 3000 + noise(500),
                       z_at(truth[e][c], r) + noise(zn), 1'b0));
        k++;
      end else if (kind == 2) begin
        // a second, compatible stub in every layer: many combinations
        send(stub_word(c, k, l + 2, r + 10, phi_at(truth[e][c], r) + noise(6),
                       z_at(truth[e][c], r) + noise(zn), last));
        k++;
      end
    end
  endtask

  // kind 0: clean plus duplicates, 1: extra wrong stub in L4, 2: heavy (two
  // stubs per layer)
  task automatic send_event(int e, int n, int kind);
    int nst = (kind == 0) ? 4 : (kind == 1) ? 5 : 8;
    make_truth(e % 4, n);
    if (kind == 2) begin
      for (int c = 0; c < n; c++) begin
        send(seed_word(e % 4, c, nst, 1'b0));
        send_stubs(e % 4, c, kind, c == n - 1);
      end
    end else begin
      for (int c = 0; c < n; c++) begin
        send(seed_word(e % 4, c, nst, 1'b0));
        send_stubs(e % 4, c, kind, (c == n - 1) && kind != 0);
      end
      if (kind == 0) begin
        // duplicates of the even candidates: another seed, three shared stubs
        for (int c = 0; c < n; c += 2) begin
          in_word_t w = seed_word(e % 4, c, 3, 1'b0);
          w.seed.slot  = CAND_W'(n + c / 2);
          w.seed.stype = 3'd1;
          w.seed.inv2r = PAR_W'(truth[e % 4][c].inv2r + noise(3000));
          send(w);
          for (int l = 0; l < 3; l++)
            send(stub_word(n + c / 2, l, l + 2, RADII[l], sphi[e % 4][c][l], sz[e % 4][c][l],
                           (c + 2 >= n) && (l == 2)));
          ndup++;
        end
      end
    end
  endtask

  task automatic check_clean(int e, int n, string tag);
    for (int c = 0; c < n; c++) begin
      check(have[e][c], $sformatf("%s: track for candidate %0d", tag, c));
      if (have[e][c]) begin
        check(got[e][c].nused == 3'd6, $sformatf("%s: six stubs in candidate %0d", tag, c));
        check(got[e][c].lmask == 11'b00000111111, $sformatf("%s: layers of candidate %0d", tag, c));
        check(iabs(int'(got[e][c].inv2r) - truth[e][c].inv2r) < 250,
              $sformatf("%s: inv2R %0d truth %0d", tag, got[e][c].inv2r, truth[e][c].inv2r));
        check(iabs(int'(got[e][c].phi0) - truth[e][c].phi0) < 40,
              $sformatf("%s: phi0 %0d truth %0d", tag, got[e][c].phi0, truth[e][c].phi0));
        check(iabs(int'(got[e][c].tanl) - truth[e][c].tanl) < 30,
              $sformatf("%s: tanL %0d truth %0d", tag, got[e][c].tanl, truth[e][c].tanl));
        check(iabs(int'(got[e][c].z0) - truth[e][c].z0) < 60,
              $sformatf("%s: z0 %0d truth %0d", tag, got[e][c].z0, truth[e][c].z0));
        if (iabs(seedp[e][c].inv2r - truth[e][c].inv2r) > 600)
          check(iabs(int'(got[e][c].inv2r) - truth[e][c].inv2r) < iabs(seedp[e][c].inv2r - truth[e][c].inv2r),
                $sformatf("%s: fit improves inv2R of candidate %0d", tag, c));
      end
    end
  endtask

  initial begin
    #200us;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);

    fork
      begin : send_events
        send_event(1, 8, 0);     // clean
        send_event(2, 8, 1);     // one wrong stub per candidate
        send_event(3, 32, 2);    // heavy
        send_event(4, 8, 0);     // clean again
        end_input();
      end
      begin : check_events
        longint used;
        for (int e = 1; e <= 4; e++) begin
          @(negedge clk);
          while (!ev_done) @(negedge clk);
          used = cycle - ((t_first[e] > t_prev_done) ? t_first[e] : t_prev_done);
          t_prev_done = cycle;
          $display("event %0d: %0d tracks, %0d cycles from start to last track",
                   e, ntracks[e % 4], used);
          case (e)
            1: begin
              check(ntracks[1] == 8, "event 1 track count");
              check(used >= 4 * 46, "event 1 took at least four updater latencies");
              check_clean(1, 8, "event 1");
            end
            2: begin
              check(ntracks[2] == 8, "event 2 track count");
              check_clean(2, 8, "event 2");
              check(stats.truncated == 0, "no truncation in light events");
            end
            3: begin
              check(stats.truncated == 1, "heavy event truncated");
              check(used <= 1280 + 3 * MAX_CAND + 16, "truncation bounds the event time");
              check(ntracks[3] > 0, "heavy event still yields tracks");
            end
            default: begin
              check(ntracks[0] == 8, "event 4 track count");
              check_clean(0, 8, "event 4");
            end
          endcase
          ntracks[e % 4] = 0;
          out_ev++;
        end
      end
    join
    check(stats.events == 16'd4, "four events closed");
    check(int'(merged) == ndup, $sformatf("duplicates merged: %0d of %0d", merged, ndup));
    check(merge_dropped == '0, "no candidate lost in the merger");
    $display("mechanisms: merged=%0d", merged);
    $display("mechanisms: in_stalls=%0d stub_waits=%0d resumed=%0d chi2_drops=%0d fifo3_drops=%0d truncated=%0d",
             stats.in_stalls, stats.stub_waits, stats.resumed, stats.chi2_drops,
             stats.fifo3_drops, stats.truncated);
    check(merged            > 0, "duplicate merge happened");
    check(stats.in_stalls   > 0, "input stall happened");
    check(stats.resumed     > 0, "FIFO 3 state taken before a waiting seed");
    check(stats.chi2_drops  > 0, "chi2 cut dropped a state");
    check(stats.fifo3_drops > 0, "FIFO 3 overflow happened");
    check(stats.truncated   > 0, "latency cut-off happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
