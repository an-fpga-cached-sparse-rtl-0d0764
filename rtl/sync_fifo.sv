// sync_fifo: small single-clock first-word-fall-through FIFO.
//
// Helper used by the matrix streamer and the result writer to absorb memory
// response jitter. push/pop may happen in the same cycle; head data (dout) is
// valid whenever empty is low. count gives the occupancy so that callers can
// issue memory requests only when they have room for the responses (credit
// flow control). Pushing when full or popping when empty is a protocol error
// and is flagged by assertions.
module sync_fifo #(
  parameter int unsigned WIDTH = 64,
  parameter int unsigned DEPTH = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push,
  input  logic [WIDTH-1:0]           din,
  input  logic                       pop,
  output logic [WIDTH-1:0]           dout,
  output logic                       empty,
  output logic                       full,
  output logic [$clog2(DEPTH+1)-1:0] count
);
  localparam int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CNT_W = $clog2(DEPTH + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    rd_ptr, wr_ptr;

  assign empty = (count == '0);
  assign full  = (count == ($clog2(DEPTH+1))'(DEPTH));
  assign dout  = mem[rd_ptr];

  function automatic logic [AW-1:0] incr(input logic [AW-1:0] p);
    return (p == AW'(DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (push) wr_ptr <= incr(wr_ptr);
      if (pop)  rd_ptr <= incr(rd_ptr);
      count <= count + CNT_W'(push) - CNT_W'(pop);
    end
  end

  always_ff @(posedge clk) begin
    if (push) mem[wr_ptr] <= din;
  end

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) push |-> (!full || pop));
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);

endmodule
