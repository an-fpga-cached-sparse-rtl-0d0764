// vector_loader: brings the words of the multiplying vector that a slice
// needs, and that are not yet cached, from external memory into the cache
// vector.
//
// Each slice header names the first vector element to read (offset) and
// the number of words (nwords); one word is S consecutive doubles, the
// paper's "wordsize", which it sets equal to the slice height. On start the
// loader issues nwords*S read requests for x[offset], x[offset+1], ... at
// up to one per cycle and writes every response, in order, into the next
// cache entry. done pulses for one cycle once the last component is in the
// cache; nwords = 0 (the slice reuses only cached data) finishes in one
// cycle without touching memory.
//
// Memory port: valid/ready request channel carrying a byte address, and an
// in-order response channel; the loader always accepts responses, since the
// cache takes one write per cycle. The handshake is this design's own.
module vector_loader
  import spmv_pkg::*;
#(
  parameter int unsigned S = 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [31:0] offset,     // first element of x to load
  input  logic [15:0] nwords,     // words of S elements to load
  input  addr_t       x_base,     // byte address of x[0]
  output logic        busy,
  output logic        done,
  // memory read port
  output logic        rd_req_valid,
  input  logic        rd_req_ready,
  output addr_t       rd_req_addr,
  input  logic        rd_resp_valid,
  output logic        rd_resp_ready,
  input  dword_t      rd_resp_data,
  // cache vector write port
  output logic        cache_wr_en,
  output dword_t      cache_wr_data
);

  logic [31:0] total;      // elements to load
  logic [31:0] n_req;      // requests issued
  logic [31:0] n_resp;     // responses received
  addr_t       next_addr;

  assign rd_req_valid  = busy && (n_req != total);
  assign rd_req_addr   = next_addr;
  assign rd_resp_ready = 1'b1;
  assign cache_wr_en   = busy && rd_resp_valid;
  assign cache_wr_data = rd_resp_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      done      <= 1'b0;
      total     <= '0;
      n_req     <= '0;
      n_resp    <= '0;
      next_addr <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy      <= 1'b1;
        total     <= 32'(nwords) * 32'(S);
        n_req     <= '0;
        n_resp    <= '0;
        next_addr <= x_base + (addr_t'(offset) << 3);
      end else if (busy) begin
        if (rd_req_valid && rd_req_ready) begin
          n_req     <= n_req + 1'b1;
          next_addr <= next_addr + addr_t'(8);
        end
        if (rd_resp_valid) begin
          n_resp <= n_resp + 1'b1;
        end
        if ((n_resp + (rd_resp_valid ? 32'd1 : 32'd0)) == total) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  a_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                    rd_resp_valid |-> busy && (n_resp < n_req));

endmodule
