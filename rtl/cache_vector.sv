// cache_vector: on-chip cache of the multiplying vector, kept as a circular
// list.
//
// Components of x arrive in the order they are read from memory and are
// written to consecutive entries; when the write pointer passes the last
// entry it wraps to entry 0 and overwrites the oldest components. Because
// the host rewrote every column index as the position its component will
// occupy here, the multiply pipeline reads the cache with that index
// directly, no tag lookup is needed. clear resets the write pointer at the
// start of each block, so a block's first load lands at entry 0.
//
// One write port (one component per cycle) and one read port with a
// registered output (data valid the cycle after rd_en), i.e. a simple
// dual-port block RAM. CACHE_LEN = 16384 doubles (32 words of 512) is the
// size the paper allocates; the port layout is this design's own.
module cache_vector #(
  parameter int unsigned CACHE_LEN = 16384,
  localparam int unsigned IW = $clog2(CACHE_LEN)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,      // restart the circular list at entry 0
  input  logic          wr_en,
  input  logic [63:0]   wr_data,
  output logic [IW-1:0] wr_ptr,     // next entry to be written
  input  logic          rd_en,
  input  logic [IW-1:0] rd_addr,
  output logic [63:0]   rd_data
);

  logic [63:0] mem [CACHE_LEN];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_ptr <= '0;
    end else if (clear) begin
      wr_ptr <= '0;
    end else if (wr_en) begin
      wr_ptr <= (wr_ptr == IW'(CACHE_LEN - 1)) ? '0 : wr_ptr + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && !clear) mem[wr_ptr] <= wr_data;
    if (rd_en)           rd_data <= mem[rd_addr];
  end

endmodule
