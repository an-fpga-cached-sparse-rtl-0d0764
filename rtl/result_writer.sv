// result_writer: copies the S row sums of a finished slice to the result
// vector y in external memory.
//
// On start it reads the partial-sum memory of slice_mac row by row (one
// cycle read latency) into a four-entry FIFO and drives the write port from
// the FIFO head, so that a write can be accepted every cycle while the
// memory keeps up, and nothing is lost while it stalls (wr_ready low). Row r
// goes to byte address y_addr + 8*r. done pulses once all S writes have been
// accepted.
//
// The paper's third step is "copy the result back"; the FIFO and the write
// handshake are this design's choices.
module result_writer
  import spmv_pkg::*;
#(
  parameter int unsigned S = 512,
  localparam int unsigned RW = (S > 1) ? $clog2(S) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  addr_t         y_addr,     // byte address of the slice's first row
  output logic          busy,
  output logic          done,
  // partial-sum read port
  output logic          res_rd_en,
  output logic [RW-1:0] res_rd_addr,
  input  dword_t        res_rd_data,
  // memory write port
  output logic          wr_valid,
  input  logic          wr_ready,
  output addr_t         wr_addr,
  output dword_t        wr_data
);

  localparam int unsigned FD = 4;

  logic [31:0] n_rd, n_wr;
  logic        rd_pending;
  logic        f_empty, f_full;
  logic [$clog2(FD+1)-1:0] f_cnt;
  addr_t       next_addr;

  assign res_rd_en   = busy && (n_rd != S) &&
                       ((32'(f_cnt) + (rd_pending ? 32'd1 : 32'd0)) < FD);
  assign res_rd_addr = n_rd[RW-1:0];

  sync_fifo #(.WIDTH(64), .DEPTH(FD)) u_fifo (
    .clk, .rst_n,
    .push (rd_pending), .din (res_rd_data),
    .pop  (wr_valid && wr_ready), .dout (wr_data),
    .empty(f_empty), .full (f_full), .count(f_cnt)
  );

  assign wr_valid = busy && !f_empty;
  assign wr_addr  = next_addr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy       <= 1'b0;
      done       <= 1'b0;
      n_rd       <= '0;
      n_wr       <= '0;
      rd_pending <= 1'b0;
      next_addr  <= '0;
    end else begin
      done       <= 1'b0;
      rd_pending <= res_rd_en;
      if (start && !busy) begin
        busy      <= 1'b1;
        n_rd      <= '0;
        n_wr      <= '0;
        next_addr <= y_addr;
      end else if (busy) begin
        if (res_rd_en) n_rd <= n_rd + 1'b1;
        if (wr_valid && wr_ready) begin
          n_wr      <= n_wr + 1'b1;
          next_addr <= next_addr + addr_t'(8);
          if (n_wr == S - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
    end
  end

  a_fifo_room: assert property (@(posedge clk) disable iff (!rst_n) rd_pending |-> !f_full);

endmodule
