// kf_fifo: synchronous first-in first-out buffer with show-ahead output.
//
// The KF worker uses three of them: FIFO 1 holds incoming stubs, FIFO 2 holds
// seed states made from the tracklet parameters, FIFO 3 holds partially worked
// states waiting to take their next stub. The paper names the three FIFOs;
// depth, element type and the show-ahead read are this design's choices.
//
// Interface: push/din write one entry per cycle when not full; dout shows the
// oldest entry whenever empty is low, and pop removes it. Push and pop may
// happen in the same cycle. count is the occupancy; almost_full is high when
// at most one free entry remains, so a producer with one register stage in
// front of push can use it as its ready. clear empties the FIFO in one cycle.
// Storage is a plain array (block or distributed RAM after synthesis).
module kf_fifo #(
  parameter type T     = logic [7:0],
  parameter int  DEPTH = 16                // power of two
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     clear,
  input  logic                     push,
  input  T                         din,
  input  logic                     pop,
  output T                         dout,
  output logic                     empty,
  output logic                     full,
  output logic                     almost_full,
  output logic [$clog2(DEPTH):0]   count
);
  localparam int AW = $clog2(DEPTH);

  T               mem [DEPTH];
  logic [AW-1:0]  wr_ptr, rd_ptr;
  logic [AW:0]    cnt;

  wire do_push = push && !full;
  wire do_pop  = pop  && !empty;

  always_ff @(posedge clk) begin
    if (do_push) mem[wr_ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      cnt    <= '0;
    end else if (clear) begin
      wr_ptr <= '0;
      rd_ptr <= '0;
      cnt    <= '0;
    end else begin
      if (do_push) wr_ptr <= wr_ptr + 1'b1;
      if (do_pop)  rd_ptr <= rd_ptr + 1'b1;
      cnt <= cnt + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  assign dout        = mem[rd_ptr];
  assign empty       = (cnt == '0);
  assign full        = (cnt == (AW+1)'(DEPTH));
  assign almost_full = (cnt >= (AW+1)'(DEPTH - 1));
  assign count       = cnt;

  // A producer must respect full and a consumer must respect empty.
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) !(push && full && !clear));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty && !clear));
endmodule
