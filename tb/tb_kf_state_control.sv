// tb_kf_state_control: checks the FIFO 3 / FIFO 2 multiplexer exhaustively.
// All combinations of empty flags, event tags and ready are applied; the
// expected selection is worked out here: stale entries are popped and not
// forwarded, FIFO 3 wins over FIFO 2, a FIFO is popped only when its entry
// is forwarded and accepted.
module tb_kf_state_control;
  import kf_pkg::*;
  logic ev, f3_empty, f2_empty, f3_pop, f2_pop, out_valid, out_ready, resumed, dropped;
  state_t f3_dout, f2_dout, out_state;
  int checks = 0, failures = 0;

  kf_state_control dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int v = 0; v < 64; v++) begin
      bit e3, e2, t3, t2, rdy, cev;
      bit w_valid, w_p3, w_p2, w_from3, w_drop;
      {e3, e2, t3, t2, rdy, cev} = 6'(v);
      f3_dout = state_t'({$urandom, $urandom}); f3_dout.ev = t3;
      f2_dout = state_t'({$urandom, $urandom}); f2_dout.ev = t2;
      f3_empty = e3; f2_empty = e2; out_ready = rdy; ev = cev;
      #1;
      w_valid = 0; w_p3 = 0; w_p2 = 0; w_from3 = 0; w_drop = 0;
      if (!e3 && t3 != cev)      begin w_p3 = 1; w_drop = 1; end
      else if (!e3)              begin w_valid = 1; w_from3 = 1; w_p3 = rdy; end
      else if (!e2 && t2 != cev) begin w_p2 = 1; w_drop = 1; end
      else if (!e2)              begin w_valid = 1; w_p2 = rdy; end
      check(out_valid == w_valid, $sformatf("valid case %0d", v));
      check(f3_pop == w_p3 && f2_pop == w_p2, $sformatf("pops case %0d", v));
      check(dropped == w_drop, $sformatf("drop case %0d", v));
      if (w_valid)
        check(out_state == (w_from3 ? f3_dout : f2_dout), $sformatf("data case %0d", v));
      check(resumed == (w_from3 && rdy && !e2), $sformatf("resumed case %0d", v));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
