// tb_kf_fifo: self-checking test of kf_fifo against a queue model.
// Random push/pop traffic (never pushing when full or popping when empty),
// checks data order, empty/full/almost_full/count every cycle, and clear.
module tb_kf_fifo;
  localparam int DEPTH = 8;
  logic clk = 1'b0, rst_n = 1'b0, clear = 1'b0, push = 1'b0, pop = 1'b0;
  logic [11:0] din = '0, dout;
  logic empty, full, almost_full;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [11:0] model[$];
  int saw_full = 0;

  kf_fifo #(.T(logic [11:0]), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      // compare status with the model
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == DEPTH), "full");
      check(almost_full == (model.size() >= DEPTH-1), "almost_full");
      check(count == model.size(), "count");
      if (model.size() > 0) check(dout == model[0], "dout");
      if (full) saw_full++;
      // drive next cycle; bias toward filling in the first half
      push = ($urandom_range(0, 99) < (cyc < 2000 ? 70 : 40)) && (model.size() < DEPTH);
      pop  = ($urandom_range(0, 99) < (cyc < 2000 ? 40 : 70)) && (model.size() > 0);
      clear = (cyc == 3000);
      din  = 12'($urandom);
      @(posedge clk);
      #1;
      if (clear) model.delete();
      else begin
        if (pop) void'(model.pop_front());
        if (push) model.push_back(din);
      end
    end
    @(negedge clk); push = 1'b0; pop = 1'b0; clear = 1'b0;
    check(saw_full > 0, "reached full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
