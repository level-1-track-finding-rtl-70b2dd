// tb_kf_state_filter: random states through the filter; each decision is
// recomputed here from the rules (chi2 <= 160 per added stub; at least four
// stubs -> accumulator; fewer than six stubs and untried stubs left -> FIFO 3,
// or a counted drop when FIFO 3 is full). Outputs appear one cycle later.
module tb_kf_state_filter;
  import kf_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, f3_full = 1'b0;
  state_t in_state = '0, f3_state, acc_state;
  logic f3_push, acc_valid, chi2_drop, fifo3_drop, busy;
  int checks = 0, failures = 0;
  int n_acc = 0, n_f3 = 0, n_chi = 0, n_ovf = 0;

  kf_state_filter dut (.*);
  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int i = 0; i < 1000; i++) begin
      state_t s;
      bit full, pass, fin, more;
      int added;
      s = state_t'({$urandom, $urandom, $urandom});
      s.nused = 3'($urandom_range(3, 6));
      s.nstubs = 4'($urandom_range(1, 8));
      s.nxt = 4'($urandom_range(1, int'(s.nstubs)));
      s.chi2_rphi = CHI2_W'($urandom_range(0, 400));
      s.chi2_rz = CHI2_W'($urandom_range(0, 400));
      full = ($urandom_range(0, 9) == 0);
      in_state = s; in_valid = 1'b1;
      @(negedge clk);
      in_valid = 1'b0; f3_full = full;
      added = int'(s.nused) - 2;
      pass = (int'(s.chi2_rphi) + int'(s.chi2_rz)) <= 160 * added;
      fin  = pass && s.nused >= 4;
      more = pass && s.nused < 6 && s.nxt < s.nstubs;
      #1;
      check(acc_valid == fin, "to accumulator");
      check(f3_push == (more && !full), "to FIFO 3");
      check(fifo3_drop == (more && full), "FIFO 3 overflow");
      check(chi2_drop == !pass, "chi2 drop");
      if (fin) check(acc_state == s, "accumulator data");
      if (more && !full) check(f3_state == s, "FIFO 3 data");
      n_acc += fin; n_f3 += more && !full; n_chi += !pass; n_ovf += more && full;
      f3_full = 1'b0;
    end
    check(n_acc > 0 && n_f3 > 0 && n_chi > 0 && n_ovf > 0, "all outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
