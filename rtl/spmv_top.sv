// spmv_top: the SpMV kernel accelerator, NUM_IP cached-SpMV cores side by
// side.
//
// The matrix is split by the host into NUM_IP blocks of consecutive slices
// and each core works on its own block concurrently with the others; they
// share nothing on chip. With the paper's sizes (S = 512, a 16,384-entry
// cache per core) four cores fit the device's block RAM, which is the
// configuration evaluated in the paper.
//
// Every core keeps its own memory ports, brought out as arrays indexed by
// core: read port 0 (headers and x), read port 1 (values), read port 2
// (column indexes) and a write port (y). The interconnect to the two DDR3
// channels and the host runtime that launches the cores are outside this
// design. Per core: start (pulse) with desc, busy, done (pulse).
module spmv_top
  import spmv_pkg::*;
#(
  parameter int unsigned NUM_IP    = NUM_IP_DEFAULT,
  parameter int unsigned S         = S_DEFAULT,
  parameter int unsigned CACHE_LEN = CACHE_LEN_DEFAULT,
  parameter int unsigned NNZ_ROW   = NNZ_ROW_DEFAULT
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start          [NUM_IP],
  input  block_desc_t desc           [NUM_IP],
  output logic        busy           [NUM_IP],
  output logic        done           [NUM_IP],
  output logic        vec_req_valid  [NUM_IP],
  input  logic        vec_req_ready  [NUM_IP],
  output addr_t       vec_req_addr   [NUM_IP],
  input  logic        vec_resp_valid [NUM_IP],
  output logic        vec_resp_ready [NUM_IP],
  input  dword_t      vec_resp_data  [NUM_IP],
  output logic        val_req_valid  [NUM_IP],
  input  logic        val_req_ready  [NUM_IP],
  output addr_t       val_req_addr   [NUM_IP],
  input  logic        val_resp_valid [NUM_IP],
  output logic        val_resp_ready [NUM_IP],
  input  dword_t      val_resp_data  [NUM_IP],
  output logic        col_req_valid  [NUM_IP],
  input  logic        col_req_ready  [NUM_IP],
  output addr_t       col_req_addr   [NUM_IP],
  input  logic        col_resp_valid [NUM_IP],
  output logic        col_resp_ready [NUM_IP],
  input  dword_t      col_resp_data  [NUM_IP],
  output logic        y_wr_valid     [NUM_IP],
  input  logic        y_wr_ready     [NUM_IP],
  output addr_t       y_wr_addr      [NUM_IP],
  output dword_t      y_wr_data      [NUM_IP]
);

  for (genvar i = 0; i < NUM_IP; i++) begin : g_ip
    spmv_core #(.S(S), .CACHE_LEN(CACHE_LEN), .NNZ_ROW(NNZ_ROW)) u_core (
      .clk, .rst_n,
      .start         (start[i]),
      .desc          (desc[i]),
      .busy          (busy[i]),
      .done          (done[i]),
      .vec_req_valid (vec_req_valid[i]),
      .vec_req_ready (vec_req_ready[i]),
      .vec_req_addr  (vec_req_addr[i]),
      .vec_resp_valid(vec_resp_valid[i]),
      .vec_resp_ready(vec_resp_ready[i]),
      .vec_resp_data (vec_resp_data[i]),
      .val_req_valid (val_req_valid[i]),
      .val_req_ready (val_req_ready[i]),
      .val_req_addr  (val_req_addr[i]),
      .val_resp_valid(val_resp_valid[i]),
      .val_resp_ready(val_resp_ready[i]),
      .val_resp_data (val_resp_data[i]),
      .col_req_valid (col_req_valid[i]),
      .col_req_ready (col_req_ready[i]),
      .col_req_addr  (col_req_addr[i]),
      .col_resp_valid(col_resp_valid[i]),
      .col_resp_ready(col_resp_ready[i]),
      .col_resp_data (col_resp_data[i]),
      .y_wr_valid    (y_wr_valid[i]),
      .y_wr_ready    (y_wr_ready[i]),
      .y_wr_addr     (y_wr_addr[i]),
      .y_wr_data     (y_wr_data[i])
    );
  end

endmodule
