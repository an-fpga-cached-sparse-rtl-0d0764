// matrix_streamer: reads one slice of the matrix and emits its entries as
// (value, cache index, row) triples in storage order.
//
// Inside a slice the ELLPACK entries are stored column by column: entry e of
// the slice is the (e / S)-th stored entry of row (e mod S), so the S rows
// of a slice are worked on in turn before any row gets its next entry. Two
// read streams run side by side: the double values (one per 64-bit beat)
// and the 16-bit cache-relative column indexes (four per beat, lowest
// address in bits [15:0]). Each stream lands in a FIFO, and a request is
// issued only while the FIFO has room for every response still in flight,
// so responses are never refused. An entry is emitted whenever both FIFOs
// hold data; out_first marks the first stored entry of a row, so that the
// accumulator starts that row from zero. done pulses once NNZ_ROW*S entries
// have been emitted.
//
// NNZ_ROW = 5 and the column-wise order follow the paper; packing four
// indexes per beat, the FIFO depth and the two separate ports are this
// design's choices.
module matrix_streamer
  import spmv_pkg::*;
#(
  parameter int unsigned S          = 512,
  parameter int unsigned NNZ_ROW    = 5,
  parameter int unsigned FIFO_DEPTH = 16,
  localparam int unsigned RW = (S > 1) ? $clog2(S) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  addr_t         val_addr,   // byte address of the slice's first value
  input  addr_t         col_addr,   // byte address of the slice's first index
  output logic          busy,
  output logic          done,
  // value read port
  output logic          val_req_valid,
  input  logic          val_req_ready,
  output addr_t         val_req_addr,
  input  logic          val_resp_valid,
  output logic          val_resp_ready,
  input  dword_t        val_resp_data,
  // column index read port
  output logic          col_req_valid,
  input  logic          col_req_ready,
  output addr_t         col_req_addr,
  input  logic          col_resp_valid,
  output logic          col_resp_ready,
  input  dword_t        col_resp_data,
  // entry stream towards the multiply-accumulate pipeline (never stalls)
  output logic          out_valid,
  output dword_t        out_val,
  output col_t          out_col,
  output logic [RW-1:0] out_row,
  output logic          out_first
);

  localparam int unsigned TOTAL      = NNZ_ROW * S;
  localparam int unsigned TOTAL_BEAT = TOTAL / COLS_PER_BEAT;
  localparam int unsigned CW         = $clog2(FIFO_DEPTH + 1);

  // ---------------- request side ----------------
  logic [31:0] val_nreq, col_nreq;
  addr_t       val_next, col_next;
  logic [CW:0] val_inflight, col_inflight;
  logic [CW-1:0] val_cnt, col_cnt;

  assign val_req_valid = busy && (val_nreq != TOTAL) &&
                         ((val_inflight + (CW+1)'(val_cnt)) < (CW+1)'(FIFO_DEPTH));
  assign col_req_valid = busy && (col_nreq != TOTAL_BEAT) &&
                         ((col_inflight + (CW+1)'(col_cnt)) < (CW+1)'(FIFO_DEPTH));
  assign val_req_addr  = val_next;
  assign col_req_addr  = col_next;

  // ---------------- FIFOs ----------------
  logic   val_empty, val_full, col_empty, col_full;
  dword_t val_head, col_head;
  logic   val_pop, col_pop;

  assign val_resp_ready = !val_full;
  assign col_resp_ready = !col_full;

  sync_fifo #(.WIDTH(64), .DEPTH(FIFO_DEPTH)) u_val_fifo (
    .clk, .rst_n,
    .push (val_resp_valid && !val_full), .din (val_resp_data),
    .pop  (val_pop), .dout (val_head),
    .empty(val_empty), .full (val_full), .count(val_cnt)
  );

  sync_fifo #(.WIDTH(64), .DEPTH(FIFO_DEPTH)) u_col_fifo (
    .clk, .rst_n,
    .push (col_resp_valid && !col_full), .din (col_resp_data),
    .pop  (col_pop), .dout (col_head),
    .empty(col_empty), .full (col_full), .count(col_cnt)
  );

  // ---------------- emit side ----------------
  logic [1:0]    lane;        // index within the current column beat
  logic [RW-1:0] row;
  logic [31:0]   k;           // stored-entry position within the row
  logic [31:0]   n_out;
  logic          fire;

  assign fire      = busy && !val_empty && !col_empty && (n_out != TOTAL);
  assign val_pop   = fire;
  assign col_pop   = fire && (lane == 2'(COLS_PER_BEAT - 1));
  assign out_valid = fire;
  assign out_val   = val_head;
  assign out_col   = col_head[lane*COL_W +: COL_W];
  assign out_row   = row;
  assign out_first = (k == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy         <= 1'b0;
      done         <= 1'b0;
      val_nreq     <= '0;
      col_nreq     <= '0;
      val_next     <= '0;
      col_next     <= '0;
      val_inflight <= '0;
      col_inflight <= '0;
      lane         <= '0;
      row          <= '0;
      k            <= '0;
      n_out        <= '0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy     <= 1'b1;
        val_nreq <= '0;
        col_nreq <= '0;
        val_next <= val_addr;
        col_next <= col_addr;
        lane     <= '0;
        row      <= '0;
        k        <= '0;
        n_out    <= '0;
      end else if (busy) begin
        if (val_req_valid && val_req_ready) begin
          val_nreq <= val_nreq + 1'b1;
          val_next <= val_next + addr_t'(8);
        end
        if (col_req_valid && col_req_ready) begin
          col_nreq <= col_nreq + 1'b1;
          col_next <= col_next + addr_t'(8);
        end
        if (fire) begin
          n_out <= n_out + 1'b1;
          lane  <= lane + 1'b1;
          if (row == RW'(S - 1)) begin
            row <= '0;
            k   <= k + 1'b1;
          end else begin
            row <= row + 1'b1;
          end
          if (n_out == TOTAL - 1) begin
            busy <= 1'b0;
            done <= 1'b1;
          end
        end
      end
      val_inflight <= val_inflight + (CW+1)'(val_req_valid && val_req_ready)
                                   - (CW+1)'(val_resp_valid && val_resp_ready);
      col_inflight <= col_inflight + (CW+1)'(col_req_valid && col_req_ready)
                                   - (CW+1)'(col_resp_valid && col_resp_ready);
    end
  end

  // A slice must split evenly into column beats.
  initial assert (TOTAL % COLS_PER_BEAT == 0)
    else $error("NNZ_ROW*S must be a multiple of %0d", COLS_PER_BEAT);

  a_val_room: assert property (@(posedge clk) disable iff (!rst_n) val_resp_valid |-> !val_full);
  a_col_room: assert property (@(posedge clk) disable iff (!rst_n) col_resp_valid |-> !col_full);

endmodule
