// spmv_core: one cached sparse matrix-vector product engine (one "IP").
//
// A core computes y = A*x for a block of B consecutive slices of S rows,
// slice after slice. For every slice it runs three steps in turn:
//   1. fetch the slice header and load the words of x the slice needs that
//      are not yet cached (vector_loader -> cache_vector);
//   2. stream the slice's values and cache-relative column indexes and
//      multiply-accumulate them row by row (matrix_streamer -> slice_mac);
//   3. copy the S row results to y (result_writer).
// The cache write pointer restarts at entry 0 when a block starts; from
// then on each load appends to the circular list, overwriting the oldest
// components, which the host's preprocessing guarantees are no longer needed.
//
// Interface: pulse start with a block descriptor (header, value, index, x
// and y base addresses and the slice count); busy stays high until done
// pulses. The three steps and their order, the cache, S and the 16-bit
// indexes are the paper's. The descriptor layout, the 64-bit header and the
// four memory ports (headers and x share the first read port; values and
// indexes have one read port each; y has a write port) are this design's
// choices. Slice k of the block has its values at val_base + 8*NNZ_ROW*S*k,
// its indexes at col_base + 2*NNZ_ROW*S*k, its header at hdr_base + 8*k and
// its rows at y_base + 8*S*k.
//
// Timing with a memory that never stalls: per slice about 4 cycles of
// header fetch, nwords*S + latency cycles of load, NNZ_ROW*S + 7 cycles of
// compute and S + 2 cycles of write-back.
module spmv_core
  import spmv_pkg::*;
#(
  parameter int unsigned S         = S_DEFAULT,
  parameter int unsigned CACHE_LEN = CACHE_LEN_DEFAULT,
  parameter int unsigned NNZ_ROW   = NNZ_ROW_DEFAULT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  block_desc_t desc,
  output logic        busy,
  output logic        done,
  // read port 0: slice headers and multiplying vector
  output logic        vec_req_valid,
  input  logic        vec_req_ready,
  output addr_t       vec_req_addr,
  input  logic        vec_resp_valid,
  output logic        vec_resp_ready,
  input  dword_t      vec_resp_data,
  // read port 1: matrix values
  output logic        val_req_valid,
  input  logic        val_req_ready,
  output addr_t       val_req_addr,
  input  logic        val_resp_valid,
  output logic        val_resp_ready,
  input  dword_t      val_resp_data,
  // read port 2: cache-relative column indexes
  output logic        col_req_valid,
  input  logic        col_req_ready,
  output addr_t       col_req_addr,
  input  logic        col_resp_valid,
  output logic        col_resp_ready,
  input  dword_t      col_resp_data,
  // write port: result vector
  output logic        y_wr_valid,
  input  logic        y_wr_ready,
  output addr_t       y_wr_addr,
  output dword_t      y_wr_data
);

  localparam int unsigned RW = (S > 1) ? $clog2(S) : 1;
  localparam int unsigned IW = $clog2(CACHE_LEN);

  typedef enum logic [2:0] {
    ST_IDLE, ST_HDR_REQ, ST_HDR_WAIT, ST_LOAD, ST_COMPUTE, ST_DRAIN, ST_WRITE
  } state_t;

  state_t      state;
  block_desc_t d;
  logic [31:0] slice;
  addr_t       hdr_ptr, val_ptr, col_ptr, y_ptr;
  slice_hdr_t  hdr;

  // ---------------- sub-block wiring ----------------
  logic ld_start, ld_busy, ld_done;
  logic ld_req_valid, ld_resp_ready;
  addr_t ld_req_addr;
  logic cache_wr_en;
  dword_t cache_wr_data;
  logic [IW-1:0] cache_wr_ptr;
  logic cache_rd_en;
  logic [IW-1:0] cache_rd_addr;
  dword_t cache_rd_data;

  logic ms_start, ms_busy, ms_done;
  logic s_valid, s_first;
  dword_t s_val;
  col_t s_col;
  logic [RW-1:0] s_row;

  logic mac_idle;
  logic res_rd_en;
  logic [RW-1:0] res_rd_addr;
  dword_t res_rd_data;

  logic wb_start, wb_busy, wb_done;

  // Port 0 is shared: headers in ST_HDR_*, the loader in ST_LOAD.
  assign vec_req_valid  = (state == ST_HDR_REQ) ? 1'b1 : (ld_busy && ld_req_valid);
  assign vec_req_addr   = (state == ST_HDR_REQ) ? hdr_ptr : ld_req_addr;
  assign vec_resp_ready = (state == ST_HDR_WAIT) ? 1'b1 : ld_resp_ready;

  vector_loader #(.S(S)) u_loader (
    .clk, .rst_n,
    .start        (ld_start),
    .offset       (hdr.offset),
    .nwords       (hdr.nwords),
    .x_base       (d.x_base),
    .busy         (ld_busy),
    .done         (ld_done),
    .rd_req_valid (ld_req_valid),
    .rd_req_ready (vec_req_ready && state == ST_LOAD),
    .rd_req_addr  (ld_req_addr),
    .rd_resp_valid(vec_resp_valid && state == ST_LOAD),
    .rd_resp_ready(ld_resp_ready),
    .rd_resp_data (vec_resp_data),
    .cache_wr_en  (cache_wr_en),
    .cache_wr_data(cache_wr_data)
  );

  cache_vector #(.CACHE_LEN(CACHE_LEN)) u_cache (
    .clk, .rst_n,
    .clear  (start && state == ST_IDLE),
    .wr_en  (cache_wr_en),
    .wr_data(cache_wr_data),
    .wr_ptr (cache_wr_ptr),
    .rd_en  (cache_rd_en),
    .rd_addr(cache_rd_addr),
    .rd_data(cache_rd_data)
  );

  matrix_streamer #(.S(S), .NNZ_ROW(NNZ_ROW)) u_stream (
    .clk, .rst_n,
    .start         (ms_start),
    .val_addr      (val_ptr),
    .col_addr      (col_ptr),
    .busy          (ms_busy),
    .done          (ms_done),
    .val_req_valid, .val_req_ready, .val_req_addr,
    .val_resp_valid, .val_resp_ready, .val_resp_data,
    .col_req_valid, .col_req_ready, .col_req_addr,
    .col_resp_valid, .col_resp_ready, .col_resp_data,
    .out_valid     (s_valid),
    .out_val       (s_val),
    .out_col       (s_col),
    .out_row       (s_row),
    .out_first     (s_first)
  );

  slice_mac #(.S(S), .CACHE_LEN(CACHE_LEN)) u_mac (
    .clk, .rst_n,
    .in_valid     (s_valid),
    .in_val       (s_val),
    .in_col       (s_col),
    .in_row       (s_row),
    .in_first     (s_first),
    .idle         (mac_idle),
    .cache_rd_en,
    .cache_rd_addr,
    .cache_rd_data,
    .res_rd_en,
    .res_rd_addr,
    .res_rd_data
  );

  result_writer #(.S(S)) u_writer (
    .clk, .rst_n,
    .start      (wb_start),
    .y_addr     (y_ptr),
    .busy       (wb_busy),
    .done       (wb_done),
    .res_rd_en,
    .res_rd_addr,
    .res_rd_data,
    .wr_valid   (y_wr_valid),
    .wr_ready   (y_wr_ready),
    .wr_addr    (y_wr_addr),
    .wr_data    (y_wr_data)
  );

  // ---------------- slice sequencer ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ST_IDLE;
      d        <= '0;
      slice    <= '0;
      hdr_ptr  <= '0;
      val_ptr  <= '0;
      col_ptr  <= '0;
      y_ptr    <= '0;
      hdr      <= '0;
      done     <= 1'b0;
      ld_start <= 1'b0;
      ms_start <= 1'b0;
      wb_start <= 1'b0;
    end else begin
      done     <= 1'b0;
      ld_start <= 1'b0;
      ms_start <= 1'b0;
      wb_start <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          d       <= desc;
          slice   <= '0;
          hdr_ptr <= desc.hdr_base;
          val_ptr <= desc.val_base;
          col_ptr <= desc.col_base;
          y_ptr   <= desc.y_base;
          if (desc.n_slices == 0) done  <= 1'b1;
          else                    state <= ST_HDR_REQ;
        end
        ST_HDR_REQ: if (vec_req_ready) state <= ST_HDR_WAIT;
        ST_HDR_WAIT: if (vec_resp_valid) begin
          hdr      <= slice_hdr_t'(vec_resp_data);
          ld_start <= 1'b1;
          state    <= ST_LOAD;
        end
        ST_LOAD: if (ld_done) begin
          ms_start <= 1'b1;
          state    <= ST_COMPUTE;
        end
        ST_COMPUTE: if (ms_done) state <= ST_DRAIN;
        ST_DRAIN: if (mac_idle && !ms_start) begin
          wb_start <= 1'b1;
          state    <= ST_WRITE;
        end
        ST_WRITE: if (wb_done) begin
          slice   <= slice + 1'b1;
          hdr_ptr <= hdr_ptr + addr_t'(8);
          val_ptr <= val_ptr + addr_t'(8 * NNZ_ROW * S);
          col_ptr <= col_ptr + addr_t'(2 * NNZ_ROW * S);
          y_ptr   <= y_ptr + addr_t'(8 * S);
          if (slice + 1 == d.n_slices) begin
            done  <= 1'b1;
            state <= ST_IDLE;
          end else begin
            state <= ST_HDR_REQ;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  assign busy = (state != ST_IDLE);

  // A slice may never load more than the cache holds.
  a_load_fits: assert property (@(posedge clk) disable iff (!rst_n)
                                ld_start |-> (32'(hdr.nwords) * S <= CACHE_LEN));
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                 !(ld_busy && (ms_busy || wb_busy)));

  // Memory-port handshake rules: a request, once raised, stays raised with
  // the same address (and data) until it is accepted.
  a_vec_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    vec_req_valid && !vec_req_ready |=> vec_req_valid && $stable(vec_req_addr));
  a_val_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    val_req_valid && !val_req_ready |=> val_req_valid && $stable(val_req_addr));
  a_col_req_stable: assert property (@(posedge clk) disable iff (!rst_n)
    col_req_valid && !col_req_ready |=> col_req_valid && $stable(col_req_addr));
  a_y_wr_stable: assert property (@(posedge clk) disable iff (!rst_n)
    y_wr_valid && !y_wr_ready |=> y_wr_valid && $stable(y_wr_addr) && $stable(y_wr_data));

  initial assert (CACHE_LEN % S == 0) else $error("CACHE_LEN must be a whole number of words");
  initial assert (CACHE_LEN <= (1 << COL_W)) else $error("CACHE_LEN exceeds the 16-bit index range");
  initial assert (S % COLS_PER_BEAT == 0) else $error("S must be a multiple of %0d", COLS_PER_BEAT);

endmodule
