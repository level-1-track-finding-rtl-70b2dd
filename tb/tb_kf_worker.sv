// tb_kf_worker: end-to-end test of one KF worker at its default parameters.
//
// Synthetic tracks are generated from random true helix parameters with the
// same linear hit model the worker fits (phi = phi0 - r*inv2R/2^12,
// z = z0 + r*tanL/2^12), with small hit noise. Each candidate is a seed in
// L1L2 whose parameters are the truth plus a deliberate error, followed by
// stubs in L3..L6 in increasing radius.
//   Event 1: clean candidates. Every candidate must yield one track using
//            all six stubs, with parameters close to the truth and closer
//            than the seed; the event must take at least four updater
//            latencies (four stubs applied in sequence).
//   Event 2: each candidate also gets a wrong stub in a second L4 position.
//            The chosen track must not use it and the chi2 cut must fire.
//   Event 3: a heavy event, 32 candidates with eight stubs each (two per
//            layer). It must stall the input, overflow FIFO 3 and hit the
//            latency limit (truncation), and the worker must still close the
//            event and go on to the next one.
//   Event 4: clean again, checking the worker recovered after truncation.
// Each mechanism (input stall, stub wait, FIFO 3 priority, chi2 drop,
// FIFO 3 overflow, truncation) is counted and must have happened.
module tb_kf_worker;
  import kf_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready;
  in_word_t in_word = '0;
  logic out_valid, ev_done;
  track_t out_track;
  kf_stats_t stats;
  int checks = 0, failures = 0;

  kf_worker dut (.*);

  always #1.5625ns clk = ~clk;   // 320 MHz

  localparam int RADII [4] = '{5100, 6900, 8800, 11000};  // L3..L6, 0.1 mm
  localparam int R_L1 = 2300, R_L2 = 3600;

  typedef struct {
    int inv2r, phi0, tanl, z0;
  } helix_t;

  // Two sets, indexed by event number modulo 2: the next event is offered
  // while the previous one is still being finished.
  helix_t truth [2][MAX_CAND];
  helix_t seedp [2][MAX_CAND];
  track_t got   [2][MAX_CAND];
  bit     have  [2][MAX_CAND];
  int     ntracks [2];
  int     out_ev = 1;               // event whose tracks are being emitted
  longint t_first [8];
  longint cycle = 0;
  always @(posedge clk) cycle++;

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
      ntracks[out_ev % 2]++;
      if (have[out_ev % 2][out_track.slot]) begin
        failures++;
        $display("FAIL two tracks for slot %0d", out_track.slot);
      end
      have[out_ev % 2][out_track.slot] = 1'b1;
      got[out_ev % 2][out_track.slot]  = out_track;
    end
  end

  // Inputs change on the falling edge; a word is taken at the rising edge
  // that follows a falling edge where in_ready was high.
  task automatic send(in_word_t w);
    @(negedge clk);
    in_word  = w;
    in_valid = 1'b1;
    while (!in_ready) @(negedge clk);
    @(posedge clk);
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

  task automatic send_stubs(int e, int c, int kind, bit eoe);
    int k = 0;
    for (int l = 0; l < 4; l++) begin
      int r = RADII[l];
      int zn = (l == 0) ? 2 : 20;
      bit last = eoe && (l == 3);
      send(stub_word(c, k, l + 2, r, phi_at(truth[e][c], r) + noise(2),
                     z_at(truth[e][c], r) + noise(zn), last && (kind != 2)));
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

  // kind 0: clean, 1: extra wrong stub in L4, 2: heavy (two stubs per layer,
  // the first half of the seeds sent ahead of their stubs)
  task automatic send_event(int e, int n, int kind);
    int nst = (kind == 0) ? 4 : (kind == 1) ? 5 : 8;
    make_truth(e % 2, n);
    if (kind == 2) begin
      for (int c = 0; c < n / 2; c++) begin
        send(seed_word(e % 2, c, nst, 1'b0));
        if (c == 0) t_first[e] = cycle;
      end
      for (int c = 0; c < n / 2; c++) send_stubs(e % 2, c, kind, 1'b0);
      for (int c = n / 2; c < n; c++) begin
        send(seed_word(e % 2, c, nst, 1'b0));
        send_stubs(e % 2, c, kind, c == n - 1);
      end
    end else begin
      for (int c = 0; c < n; c++) begin
        send(seed_word(e % 2, c, nst, 1'b0));
        if (c == 0) t_first[e] = cycle;
        send_stubs(e % 2, c, kind, c == n - 1);
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
          used = cycle - t_first[e];
          $display("event %0d: %0d tracks, %0d cycles from first word to last track",
                   e, ntracks[e % 2], used);
          case (e)
            1: begin
              check(ntracks[1] == 8, "event 1 track count");
              check(used >= 4 * 46, "event 1 took at least four updater latencies");
              check_clean(1, 8, "event 1");
            end
            2: begin
              check(ntracks[0] == 8, "event 2 track count");
              check_clean(0, 8, "event 2");
              check(stats.truncated == 0, "no truncation in light events");
            end
            3: begin
              check(stats.truncated == 1, "heavy event truncated");
              check(used <= 1280 + 2 * MAX_CAND + 16, "truncation bounds the event time");
              check(ntracks[1] > 0, "heavy event still yields tracks");
            end
            default: begin
              check(ntracks[0] == 8, "event 4 track count");
              check_clean(0, 8, "event 4");
            end
          endcase
          ntracks[e % 2] = 0;
          out_ev++;
        end
      end
    join
    check(stats.events == 16'd4, "four events closed");
    $display("mechanisms: in_stalls=%0d stub_waits=%0d resumed=%0d chi2_drops=%0d fifo3_drops=%0d truncated=%0d",
             stats.in_stalls, stats.stub_waits, stats.resumed, stats.chi2_drops,
             stats.fifo3_drops, stats.truncated);
    check(stats.in_stalls   > 0, "input stall happened");
    check(stats.stub_waits  > 0, "associator waited for a stub");
    check(stats.resumed     > 0, "FIFO 3 state taken before a waiting seed");
    check(stats.chi2_drops  > 0, "chi2 cut dropped a state");
    check(stats.fifo3_drops > 0, "FIFO 3 overflow happened");
    check(stats.truncated   > 0, "latency cut-off happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
