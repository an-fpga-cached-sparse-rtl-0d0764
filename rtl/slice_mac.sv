// slice_mac: multiply-accumulate pipeline and partial-sum memory of a slice.
//
// Every entry (value v, cache index c, row r) goes through:
//   cycle 0      read x = cache[c]
//   cycle 1..2   p = v * x                       (fp64_mul, 2 stages)
//   cycle 3      read acc[r]
//   cycle 4..5   acc[r] = (first ? +0 : acc[r]) + p  (fp64_add, 2 stages)
//   cycle 6      write acc[r]
// An entry and the next entry of the same row are S entries apart in the
// column-wise stream, so the read of acc[r] for the later one happens at
// least S-3 cycles after the write of the earlier one: the floating-point
// latency is hidden by working through the rows of the slice in turn, which
// is why the slice height is chosen to cover the pipeline depth. The
// pipeline never stalls; it accepts one entry per cycle and a bubble
// whenever in_valid is low. idle is high when no entry is in flight.
//
// After the last entry has drained, the S row sums are read out through the
// res_rd port (registered, data the cycle after res_rd_en). That port
// shares the accumulator's read port with the pipeline, which has priority;
// the controller only reads results while the pipeline is idle.
//
// The stage split and the use of a row-sum memory are this design's reading
// of the paper's "S rows hide the pipeline latency".
module slice_mac
  import spmv_pkg::*;
#(
  parameter int unsigned S         = 512,
  parameter int unsigned CACHE_LEN = 16384,
  localparam int unsigned RW = (S > 1) ? $clog2(S) : 1,
  localparam int unsigned IW = $clog2(CACHE_LEN)
) (
  input  logic          clk,
  input  logic          rst_n,
  // entry stream
  input  logic          in_valid,
  input  dword_t        in_val,
  input  col_t          in_col,
  input  logic [RW-1:0] in_row,
  input  logic          in_first,
  output logic          idle,
  // cache vector read port
  output logic          cache_rd_en,
  output logic [IW-1:0] cache_rd_addr,
  input  dword_t        cache_rd_data,
  // result read port
  input  logic          res_rd_en,
  input  logic [RW-1:0] res_rd_addr,
  output dword_t        res_rd_data
);

  // ---- stage 0 -> 1: cache read ----
  logic          p1_valid, p1_first;
  dword_t        p1_val;
  logic [RW-1:0] p1_row;

  assign cache_rd_en   = in_valid;
  assign cache_rd_addr = in_col[IW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p1_valid <= 1'b0;
    else        p1_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    p1_val   <= in_val;
    p1_row   <= in_row;
    p1_first <= in_first;
  end

  // ---- multiply ----
  logic   m_valid;
  dword_t m_prod;
  logic [RW-1:0] m_row_d [FP_MUL_LAT];
  logic          m_first_d [FP_MUL_LAT];

  fp64_mul u_mul (
    .clk, .rst_n,
    .in_valid (p1_valid),
    .a        (p1_val),
    .b        (cache_rd_data),
    .out_valid(m_valid),
    .y        (m_prod)
  );

  always_ff @(posedge clk) begin
    m_row_d[0]   <= p1_row;
    m_first_d[0] <= p1_first;
    for (int i = 1; i < FP_MUL_LAT; i++) begin
      m_row_d[i]   <= m_row_d[i-1];
      m_first_d[i] <= m_first_d[i-1];
    end
  end

  // ---- accumulator read ----
  dword_t acc [S];
  dword_t acc_rd_data;
  logic          acc_rd_en;
  logic [RW-1:0] acc_rd_addr;

  assign acc_rd_en   = m_valid || res_rd_en;
  assign acc_rd_addr = m_valid ? m_row_d[FP_MUL_LAT-1] : res_rd_addr;
  assign res_rd_data = acc_rd_data;

  logic          p4_valid, p4_first;
  dword_t        p4_prod;
  logic [RW-1:0] p4_row;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) p4_valid <= 1'b0;
    else        p4_valid <= m_valid;
  end

  always_ff @(posedge clk) begin
    p4_prod  <= m_prod;
    p4_row   <= m_row_d[FP_MUL_LAT-1];
    p4_first <= m_first_d[FP_MUL_LAT-1];
  end

  // ---- add ----
  logic   a_valid;
  dword_t a_sum;
  logic [RW-1:0] a_row_d [FP_ADD_LAT];

  fp64_add u_add (
    .clk, .rst_n,
    .in_valid (p4_valid),
    .a        (p4_first ? FP_ZERO : acc_rd_data),
    .b        (p4_prod),
    .out_valid(a_valid),
    .y        (a_sum)
  );

  always_ff @(posedge clk) begin
    a_row_d[0] <= p4_row;
    for (int i = 1; i < FP_ADD_LAT; i++) a_row_d[i] <= a_row_d[i-1];
  end

  // ---- accumulator memory: one write port, one read port ----
  always_ff @(posedge clk) begin
    if (a_valid)   acc[a_row_d[FP_ADD_LAT-1]] <= a_sum;
    if (acc_rd_en) acc_rd_data <= acc[acc_rd_addr];
  end

  // ---- occupancy ----
  // Entries in flight between in_valid and the accumulator write.
  localparam int unsigned DEPTH = 2 + FP_MUL_LAT + FP_ADD_LAT;
  localparam int unsigned FW = $clog2(DEPTH + 2);
  logic [FW-1:0] in_flight;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_flight <= '0;
    else        in_flight <= in_flight + FW'(in_valid) - FW'(a_valid);
  end

  assign idle = (in_flight == '0) && !in_valid;

  // The latency of one row update must fit between two entries of the row.
  initial assert (S > DEPTH)
    else $error("slice height S=%0d does not hide the %0d-cycle accumulate loop", S, DEPTH);

  a_no_result_read_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                                res_rd_en |-> !m_valid);

endmodule
