// tb_kf_stub_state_associator: checks the (state, stub) pairs the associator emits.
// Random candidates with up to eight stubs in random layers are loaded
// through a FIFO model; random states (random start index and used-layer
// mask) are then offered. The expected pairs are listed here: one per stub
// from the state's start index to the candidate's last stub, skipping stubs
// in layers the state already uses, in stub (radius) order, each carrying
// nxt = stub index + 1. A state offered before its stubs arrive must wait
// (stub_wait) and then emit the same pairs; stubs tagged with another event
// must be ignored.
module tb_kf_stub_state_associator;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, ev = 1'b0, ev_start = 1'b0;
  logic f1_empty, f1_pop, in_valid = 1'b0, in_ready, out_valid, busy, stub_wait;
  ev_stub_t f1_dout;
  state_t in_state = '0, out_state;
  stub_t out_stub;
  int checks = 0, failures = 0, waits = 0;

  kf_stub_state_associator dut (.*);
  always #5 clk = ~clk;

  ev_stub_t fq [$];
  // FIFO 1 model: the outputs are refreshed whenever the queue changes
  task automatic refresh();
    f1_empty = (fq.size() == 0);
    f1_dout  = f1_empty ? '0 : fq[0];
  endtask
  initial refresh();
  always @(posedge clk) begin
    if (f1_pop && fq.size() > 0) void'(fq.pop_front());
    #1 refresh();
  end
  always @(negedge clk) if (stub_wait) waits++;

  stub_t  stubs [MAX_CAND][MAX_STUBS];
  int     nst   [MAX_CAND];

  state_t exp_s [$];
  stub_t  exp_u [$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    if (out_valid) begin
      if (exp_s.size() == 0) check(1'b0, "unexpected pair");
      else begin
        state_t ws;
        stub_t  wu;
        ws = exp_s.pop_front();
        wu = exp_u.pop_front();
        if (out_state != ws || out_stub != wu)
          $display("got slot %0d nxt %0d idx %0d, want slot %0d nxt %0d idx %0d",
                   out_state.slot, out_state.nxt, out_stub.idx, ws.slot, ws.nxt, wu.idx);
        check(out_state == ws, "pair state");
        check(out_stub == wu, "pair stub");
      end
    end
  end

  task automatic load(int c, bit evtag);
    for (int j = 0; j < nst[c]; j++) fq.push_back('{ev: evtag, stub: stubs[c][j]});
    refresh();
  endtask

  task automatic offer(state_t s);
    for (int j = int'(s.nxt); j < int'(s.nstubs); j++) begin
      if (!s.lmask[stubs[s.slot][j].layer]) begin
        state_t ws;
        ws = s;
        ws.nxt = (IDX_W+1)'(j + 1);
        exp_s.push_back(ws);
        exp_u.push_back(stubs[s.slot][j]);
      end
    end
    @(negedge clk);
    while (!in_ready) @(negedge clk);
    in_state = s; in_valid = 1'b1;
    @(negedge clk);
    in_valid = 1'b0;
  endtask

  function automatic state_t rand_state(int c);
    state_t s = state_t'({$urandom, $urandom, $urandom, $urandom});
    s.ev = ev; s.slot = CAND_W'(c); s.nstubs = (IDX_W+1)'(nst[c]);
    s.nxt = (IDX_W+1)'($urandom_range(0, nst[c]));
    s.lmask = NLAYER'($urandom) & NLAYER'($urandom);
    return s;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < MAX_CAND; c++) begin
      nst[c] = $urandom_range(1, MAX_STUBS);
      for (int j = 0; j < MAX_STUBS; j++) begin
        stubs[c][j] = stub_t'({$urandom, $urandom});
        stubs[c][j].slot = CAND_W'(c); stubs[c][j].idx = IDX_W'(j);
        stubs[c][j].layer = 4'($urandom_range(0, NLAYER - 1));
      end
    end
    // stale stubs of another event for slot 0 must be ignored
    for (int j = 0; j < MAX_STUBS; j++) begin
      ev_stub_t x; x.ev = 1'b1; x.stub = stubs[0][MAX_STUBS-1-j]; x.stub.idx = IDX_W'(j);
      x.stub.phi = ~x.stub.phi;
      fq.push_back(x);
    end
    refresh();
    for (int c = 0; c < MAX_CAND / 2; c++) load(c, 1'b0);
    repeat (300) @(negedge clk);
    for (int i = 0; i < 100; i++) offer(rand_state($urandom_range(0, MAX_CAND / 2 - 1)));
    // a state offered before its candidate's stubs have been loaded
    begin
      state_t s;
      s = rand_state(MAX_CAND - 1);
      while (busy) @(negedge clk);
      s.nxt = '0;
      fork
        offer(s);
        begin repeat (6) @(negedge clk); load(MAX_CAND - 1, 1'b0); end
      join
    end
    repeat (40) @(negedge clk);
    check(exp_s.size() == 0, "all expected pairs emitted");
    check(waits > 0, "waited for late stubs");
    check(!busy, "idle at the end");
    // ev_start clears the stub store: a state must then wait
    @(negedge clk); ev_start = 1'b1; @(negedge clk); ev_start = 1'b0;
    waits = 0;
    begin
      state_t s;
      s = rand_state(1);
      s.nxt = '0; s.lmask = '0;
      in_state = s; in_valid = 1'b1; @(negedge clk); in_valid = 1'b0;
      repeat (5) @(negedge clk);
      check(waits >= 4 && busy && exp_s.size() == 0, "store cleared by ev_start");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
