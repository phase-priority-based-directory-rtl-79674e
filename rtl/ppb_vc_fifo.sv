// ppb_vc_fifo: the flit buffer of one virtual channel.
//
// A plain synchronous FIFO of DEPTH entries of type T. Writing when full or
// reading when empty is a protocol error of the credit flow control that
// feeds it, and is caught by assertions. The read data is the head entry,
// available combinationally while 'empty' is low. The buffer depth is not
// given in the paper (4 flits here).
module ppb_vc_fifo #(
  parameter type         T     = logic [7:0],
  parameter int unsigned DEPTH = 4,
  localparam int unsigned PTR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  wr_en,
  input  T      wr_data,
  input  logic  rd_en,
  output T      rd_data,
  output logic  empty,
  output logic  full,
  output logic [PTR_W:0] count
);

  T                 mem [DEPTH];
  logic [PTR_W-1:0] wptr, rptr;

  assign empty   = (count == 0);
  assign full    = (count == (PTR_W+1)'(DEPTH));
  assign rd_data = mem[rptr];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr  <= '0;
      rptr  <= '0;
      count <= '0;
    end else begin
      if (wr_en) wptr <= (wptr == PTR_W'(DEPTH - 1)) ? '0 : wptr + 1'b1;
      if (rd_en) rptr <= (rptr == PTR_W'(DEPTH - 1)) ? '0 : rptr + 1'b1;
      count <= count + (PTR_W+1)'(wr_en) - (PTR_W+1)'(rd_en);
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en) mem[wptr] <= wr_data;
  end

  assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && full && !rd_en))
    else $error("ppb_vc_fifo: write to a full buffer");
  assert property (@(posedge clk) disable iff (!rst_n) !(rd_en && empty))
    else $error("ppb_vc_fifo: read from an empty buffer");

endmodule
