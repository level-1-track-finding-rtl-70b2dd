// tb_workload_ttbar200: the top at its default parameters under the load one
// worker would see at 200 pileup.
//
// Sizing: about 570 track candidates per processing board and time slice
// before duplicate merging and about 175 after, spread over 18 workers: about
// 32 candidates into each merger and about 10 out of it. Each event here has
// 10 particles, each found by three seeds (30 candidates): the first copy
// has an L1L2 seed and stubs in L3..L6; the two others have other seeds and
// three of the same four stubs, so they share exactly three layers with the
// first and must be merged into it. Six events are sent back to back.
// Every event must give exactly 10 tracks, each using all six stubs and
// close to the truth, with 20 merges, no candidate lost, no truncation, and
// the time from the event's last input word (or the previous event's end,
// whichever is later) to its last track within the 1280-cycle (4 us)
// budget.
module tb_workload_ttbar200;
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
  localparam int NEV = 6, NPART = 10;
  longint t_first [NEV+2];
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

  // one event: n particles, each as three candidates in a row
  task automatic send_event(int e, int n);
    make_truth(e % 4, n);
    for (int c = 0; c < n; c++) begin
      send(seed_word(e % 4, c, 4, 1'b0));
      send_stubs(e % 4, c, 0, 1'b0);
      for (int cp = 1; cp <= 2; cp++) begin
        int skip;
        int k;
        in_word_t w;
        skip = $urandom_range(0, 3);
        w = seed_word(e % 4, c, 3, 1'b0);
        w.seed.stype = 3'(cp);
        w.seed.inv2r = PAR_W'(truth[e % 4][c].inv2r + noise(3000));
        send(w);
        k = 0;
        for (int l = 0; l < 4; l++)
          if (l != skip) begin
            send(stub_word(c, k, l + 2, RADII[l], sphi[e % 4][c][l], sz[e % 4][c][l],
                           (c == n - 1) && (cp == 2) && (k == 2)));
            k++;
          end
        ndup++;
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
        for (int e = 1; e <= NEV; e++) send_event(e, NPART);
        end_input();
      end
      begin : check_events
        longint used;
        for (int e = 1; e <= NEV; e++) begin
          @(negedge clk);
          while (!ev_done) @(negedge clk);
          used = cycle - ((t_first[e] > t_prev_done) ? t_first[e] : t_prev_done);
          t_prev_done = cycle;
          $display("event %0d: %0d tracks, %0d cycles from start to last track",
                   e, ntracks[e % 4], used);
          check(ntracks[e % 4] == NPART, $sformatf("event %0d track count", e));
          check(used <= 1280, $sformatf("event %0d within the 4 us budget", e));
          check_clean(e % 4, NPART, $sformatf("event %0d", e));
          ntracks[e % 4] = 0;
          out_ev++;
        end
      end
    join
    check(stats.events == 16'(NEV), "all events closed");
    check(stats.truncated == 0, "no truncation");
    check(int'(merged) == ndup, $sformatf("duplicates merged: %0d of %0d", merged, ndup));
    check(merge_dropped == '0, "no candidate lost in the merger");
    $display("mechanisms: merged=%0d in_stalls=%0d resumed=%0d chi2_drops=%0d fifo3_drops=%0d",
             merged, stats.in_stalls, stats.resumed, stats.chi2_drops, stats.fifo3_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
