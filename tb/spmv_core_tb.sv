// spmv_core_tb: end-to-end test of one cached-SpMV core at reduced size
// (S = 16 rows per slice, 128-entry cache = 8 words).
//
// A generated banded matrix of 300 rows (19 slices) is split into two
// blocks that the core runs one after the other, which also checks that the
// cache restarts at each block. The first block runs against a memory that
// never stalls, and the time from the start of each slice's compute step to
// its end is checked against the one-entry-per-cycle rate (NNZ*S cycles
// plus the memory latency, measured at the value port). The second block runs with 20 % random
// back-pressure on every port. All rows of y are compared bit for bit with
// the reference. The test also counts, and requires at least once: a slice
// needing no new words (full reuse), a slice loading words, a wrap-around
// of the circular cache, padded ELLPACK entries, and memory stalls.
module spmv_core_tb;
  import spmv_pkg::*;
  import spmv_tb_pkg::*;

  localparam int unsigned S = 16, CL = 128, NNZ = 5;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0;
  block_desc_t desc = '0;
  logic        busy, done;

  logic        rq_v [3], rq_r [3], rs_v [3], rs_r [3];
  logic [63:0] rq_a [3], rs_d [3];
  logic        wr_v [1], wr_r [1];
  logic [63:0] wr_a [1], wr_d [1];

  spmv_core #(.S(S), .CACHE_LEN(CL), .NNZ_ROW(NNZ)) dut (
    .clk, .rst_n, .start, .desc, .busy, .done,
    .vec_req_valid (rq_v[0]), .vec_req_ready (rq_r[0]), .vec_req_addr (rq_a[0]),
    .vec_resp_valid(rs_v[0]), .vec_resp_ready(rs_r[0]), .vec_resp_data(rs_d[0]),
    .val_req_valid (rq_v[1]), .val_req_ready (rq_r[1]), .val_req_addr (rq_a[1]),
    .val_resp_valid(rs_v[1]), .val_resp_ready(rs_r[1]), .val_resp_data(rs_d[1]),
    .col_req_valid (rq_v[2]), .col_req_ready (rq_r[2]), .col_req_addr (rq_a[2]),
    .col_resp_valid(rs_v[2]), .col_resp_ready(rs_r[2]), .col_resp_data(rs_d[2]),
    .y_wr_valid(wr_v[0]), .y_wr_ready(wr_r[0]), .y_wr_addr(wr_a[0]), .y_wr_data(wr_d[0])
  );

  ddr_model #(.NRD(3), .NWR(1), .WORDS(1 << 13), .LAT_MIN(2), .LAT_MAX(6), .STALL_PCT(0)) u_ddr (
    .clk,
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_ready(rs_r), .rd_resp_data(rs_d),
    .wr_valid(wr_v), .wr_ready(wr_r), .wr_addr(wr_a), .wr_data(wr_d)
  );

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Observation at the memory ports: x words loaded (to see the cache
  // wrap), done pulses, and the time each slice's value stream takes.
  SpmvProblem prob;
  int n_wrap_seen = 0, n_done = 0, x_loaded = 0;
  int cyc = 0, t0 = 0, n_val = 0, cmp_max = 0;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (start) x_loaded = 0;
    if (rst_n && prob != null) begin
      if (rq_v[0] && rq_r[0] && rq_a[0] >= prob.x_base() && rq_a[0] < prob.x_base() + 8 * prob.n_x) begin
        x_loaded++;
        if (x_loaded % CL == 0) n_wrap_seen++;
      end
      if (rq_v[1] && rq_r[1] && ((rq_a[1] - prob.val_w * 8) % (NNZ * S * 8)) == 0) begin
        t0 = cyc; n_val = 0;
      end
      if (rs_v[1] && rs_r[1]) begin
        n_val++;
        if (n_val == NNZ * S && u_ddr.stall_pct == 0 && cyc - t0 > cmp_max) cmp_max = cyc - t0;
      end
    end
    if (rst_n && done) n_done++;
  end

  task automatic run_block(SpmvProblem p, int unsigned b);
    desc.hdr_base <= p.blk_hdr(b);
    desc.val_base <= p.blk_val(b);
    desc.col_base <= p.blk_col(b);
    desc.x_base   <= p.x_base();
    desc.y_base   <= p.blk_y(b);
    desc.n_slices <= p.blk_count[b];
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    @(posedge clk);
    check(busy, "core busy after start");
    while (!done) @(posedge clk);
    @(posedge clk);
    check(!busy, "core idle after done");
  endtask

  initial begin
    SpmvProblem p;
    p = new(S, CL, NNZ, 2, 300, 30);
    p.generate_matrix();
    p.partition_and_preprocess();
    prob = p;
    check(p.n_errors == 0, "generated matrix fits the cache window");
    check(p.total_w <= (1 << 13), "memory image fits the model");
    for (longint unsigned w = 0; w < p.total_w; w++) u_ddr.mem[w] = p.image_word(w);

    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    u_ddr.stall_pct = 0;
    run_block(p, 0);
    check(cmp_max >= int'(NNZ * S) - 1 && cmp_max <= int'(NNZ * S) + 8,
          $sformatf("value stream of a slice takes %0d cycles for %0d entries", cmp_max, NNZ * S));

    u_ddr.stall_pct = 20;
    run_block(p, 1);

    for (int unsigned r = 0; r < p.n_pad; r++) begin
      logic [63:0] got;
      got = u_ddr.mem[p.y_w + r];
      check(got === p.y_ref[r], $sformatf("row %0d: got %h expected %h", r, got, p.y_ref[r]));
    end
    check(n_done == 2, "one done pulse per block");
    check(u_ddr.n_bad_addr == 0, "all accesses inside the memory image");

    // mechanisms exercised
    $display("reuse slices %0d, load slices %0d, wraps %0d (seen %0d), padding %0d, stalls %0d, compute %0d cycles",
             p.n_reuse_slices, p.n_load_slices, p.n_wraps, n_wrap_seen, p.n_padding, u_ddr.n_stalls, cmp_max);
    check(p.n_reuse_slices > 0, "a slice reused the cache without loading");
    check(p.n_load_slices > 0, "a slice loaded new words");
    check(n_wrap_seen > 0 && n_wrap_seen == int'(p.n_wraps), "circular cache wrapped as predicted");
    check(p.n_padding > 0, "padded entries present");
    check(u_ddr.n_stalls > 0, "memory back-pressure occurred");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
