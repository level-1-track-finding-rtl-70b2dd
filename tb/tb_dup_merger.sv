// tb_dup_merger: checks duplicate merging against a reference written here.
//
// Each event holds a few "particles", each found by one to three seeds.
// Every copy carries a random subset of the particle's stubs (at least three
// layers in common for most copies, fewer for some), plus unrelated
// candidates. The reference keeps a list of candidates: a new one is merged
// into the first kept one with which it shares stubs in at least three
// layers (its missing stubs appended, up to eight), otherwise appended. The
// merger's output must list the same candidates in the same order, slots
// renumbered, each with the same seed and stub set, stubs sorted by radius,
// eoe on the last word, and the merged count must match. Random
// back-pressure is applied on the output.
module tb_dup_merger;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, in_ready, out_valid, out_ready = 1'b0;
  in_word_t in_word = '0, out_word;
  logic [15:0] merged, dropped;
  int checks = 0, failures = 0;

  dup_merger dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  // reference candidate list (flat arrays, 32 x 8)
  seed_t rs [MAX_CAND];
  stub_t ru [MAX_CAND][MAX_STUBS];
  int    rn [MAX_CAND];
  int    nk;
  int    exp_merged = 0;

  function automatic bit same(stub_t a, stub_t b);
    return a.layer == b.layer && a.r == b.r && a.phi == b.phi && a.z == b.z;
  endfunction

  task automatic ref_add(seed_t s, stub_t u [MAX_STUBS], int n);
    for (int k = 0; k < nk; k++) begin
      bit [NLAYER-1:0] sh;
      bit dup [MAX_STUBS];
      sh = '0;
      for (int i = 0; i < n; i++) begin
        dup[i] = 0;
        for (int j = 0; j < rn[k]; j++) if (same(u[i], ru[k][j])) dup[i] = 1;
        if (dup[i]) sh[u[i].layer] = 1;
      end
      if ($countones(sh) >= 3) begin
        for (int i = 0; i < n; i++)
          if (!dup[i] && rn[k] < MAX_STUBS) begin ru[k][rn[k]] = u[i]; rn[k]++; end
        exp_merged++;
        return;
      end
    end
    rs[nk] = s;
    for (int i = 0; i < n; i++) ru[nk][i] = u[i];
    rn[nk] = n;
    nk++;
  endtask

  task automatic send(in_word_t w);
    @(negedge clk);
    in_word = w; in_valid = 1'b1;
    #1;
    while (!in_ready) begin @(negedge clk); #1; end
    @(posedge clk);
  endtask

  // receive one event and compare it with the reference
  task automatic receive_and_check(int e);
    int c, got_n;
    bit done;
    stub_t gu [MAX_STUBS];
    seed_t gs;
    c = 0; got_n = 0; done = 0;
    while (!done) begin
      @(negedge clk);
      out_ready = ($urandom_range(0, 3) != 0);
      #1;
      if (out_valid && out_ready) begin
        if (out_word.kind == W_SEED) begin
          gs = out_word.seed; got_n = 0;
          if (nk == 0) check(out_word.eoe, "empty event marker");
          else begin
            check(int'(gs.slot) == c, "slot renumbered");
            check(int'(gs.nstubs) == rn[c], $sformatf("event %0d cand %0d stub count", e, c));
            check(gs.inv2r == rs[c].inv2r && gs.phi0 == rs[c].phi0 && gs.stype == rs[c].stype,
                  "first seed kept");
          end
        end else begin
          gu[got_n] = out_word.stub;
          if (got_n > 0) check(out_word.stub.r >= gu[got_n-1].r, "radius order");
          check(int'(out_word.stub.idx) == got_n, "stub index");
          got_n++;
        end
        if ((out_word.kind == W_STUB && got_n == rn[c]) ||
            (out_word.kind == W_SEED && (nk == 0 || rn[c] == 0))) begin
          // candidate complete: compare stub sets
          if (nk > 0) begin
            for (int j = 0; j < rn[c]; j++) begin
              bit found;
              found = 0;
              for (int i = 0; i < got_n; i++) if (same(gu[i], ru[c][j])) found = 1;
              check(found, $sformatf("event %0d cand %0d stub %0d present", e, c, j));
            end
          end
          c++;
          check(out_word.eoe == (c >= nk), "eoe on the last word only");
          if (out_word.eoe) done = 1;
        end
      end
    end
    check(c == (nk == 0 ? 1 : nk), "candidate count");
    @(posedge clk);                 // let the eoe word be taken
    #1 out_ready = 1'b0;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // one event: six particles, each found by one to three seeds
  task automatic do_event(int e);
    stub_t pst [6][6];
    seed_t sq [$];
    int    nq [$];
    stub_t uq [$];
    int    ui;
    stub_t arr [MAX_STUBS];
    in_word_t w;
    nk = 0;
    ui = 0;
    for (int p = 0; p < 6; p++)
      for (int l = 0; l < 6; l++) begin
        pst[p][l] = stub_t'({$urandom, $urandom});
        pst[p][l].layer = 4'(l + 2);
        pst[p][l].r = R_W'(3000 + 1500 * l + $urandom_range(0, 400));
      end
    if (e != 5) begin
      for (int p = 0; p < 6; p++) begin
        int copies;
        copies = $urandom_range(1, 3);
        for (int cp = 0; cp < copies; cp++) begin
          seed_t s;
          int n;
          s = seed_t'({$urandom, $urandom, $urandom, $urandom});
          s.stype = 3'($urandom_range(0, 6));
          n = 0;
          for (int l = 0; l < 6; l++)
            if ($urandom_range(0, 99) < 70) begin uq.push_back(pst[p][l]); n++; end
          sq.push_back(s); nq.push_back(n);
        end
      end
    end
    for (int c = 0; c < sq.size(); c++) begin
      w = '0;
      w.kind = W_SEED; w.seed = sq[c]; w.seed.slot = CAND_W'(c); w.seed.nstubs = 4'(nq[c]);
      w.eoe = (c == sq.size() - 1) && (nq[c] == 0);
      send(w);
      for (int i = 0; i < nq[c]; i++) begin
        w = '0;
        w.kind = W_STUB; w.stub = uq[ui]; arr[i] = uq[ui]; ui++;
        w.stub.slot = CAND_W'(c); w.stub.idx = IDX_W'(i);
        w.eoe = (c == sq.size() - 1) && (i == nq[c] - 1);
        send(w);
      end
      ref_add(sq[c], arr, nq[c]);
    end
    if (sq.size() == 0) begin
      w = '0;
      w.kind = W_SEED; w.eoe = 1'b1;      // an event with one empty candidate
      send(w);
      ref_add(w.seed, arr, 0);
    end
    @(negedge clk); in_valid = 1'b0;
    receive_and_check(e);
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 12; e++) begin do_event(e); end
    check(int'(merged) == exp_merged, $sformatf("merged count %0d vs %0d", merged, exp_merged));
    check(exp_merged > 0, "some candidates were merged");
    check(dropped == '0, "nothing dropped");
    $display("merged %0d", exp_merged);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
