// tb_kf_state_accumulator: random states for random candidate slots; the
// best one per slot is tracked here (more stubs first, then smaller summed
// chi2; other-event states ignored). After flush exactly one track per slot
// that received a state must come out, in slot order, equal to the expected
// best, and the accumulator must be empty for the next event.
module tb_kf_state_accumulator;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, ev = 1'b0, in_valid = 1'b0, flush = 1'b0;
  state_t in_state = '0;
  logic out_valid, flushing, done;
  track_t out_track;
  int checks = 0, failures = 0;

  kf_state_accumulator dut (.*);
  always #5 clk = ~clk;

  track_t best [MAX_CAND];
  bit     have [MAX_CAND];
  int     nout;
  int     last_slot;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  always @(negedge clk) begin
    if (out_valid) begin
      nout++;
      check(int'(out_track.slot) > last_slot, "slot order");
      last_slot = out_track.slot;
      check(have[out_track.slot], "track only for filled slot");
      check(out_track == best[out_track.slot], $sformatf("best of slot %0d", out_track.slot));
      have[out_track.slot] = 1'b0;
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int e = 0; e < 3; e++) begin
      for (int i = 0; i < 300; i++) begin
        state_t s;
        track_t t;
        s = state_t'({$urandom, $urandom, $urandom, $urandom});
        s.slot = CAND_W'($urandom_range(0, MAX_CAND - 8));   // some slots stay empty
        s.nused = 3'($urandom_range(4, 6));
        s.chi2_rphi = CHI2_W'($urandom_range(0, 1000));
        s.chi2_rz = CHI2_W'($urandom_range(0, 1000));
        s.ev = ($urandom_range(0, 9) == 0) ? !ev : ev;
        t = state_to_track(s);
        if (s.ev == ev) begin
          if (!have[s.slot] || t.nused > best[s.slot].nused ||
              (t.nused == best[s.slot].nused &&
               int'(t.chi2_rphi) + int'(t.chi2_rz) <
               int'(best[s.slot].chi2_rphi) + int'(best[s.slot].chi2_rz))) begin
            best[s.slot] = t; have[s.slot] = 1'b1;
          end
        end
        in_state = s; in_valid = 1'b1;
        @(negedge clk);
      end
      in_valid = 1'b0;
      nout = 0; last_slot = -1;
      flush = 1'b1; @(negedge clk); flush = 1'b0;
      while (!done) @(negedge clk);
      @(negedge clk);
      for (int c = 0; c < MAX_CAND; c++) check(!have[c], $sformatf("slot %0d emitted", c));
      check(nout > 0 && nout <= MAX_CAND - 7, "track count");
      ev = !ev;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
