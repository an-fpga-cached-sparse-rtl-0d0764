// spmv_top_tb: end-to-end test of the four-core accelerator at reduced size
// (S = 16, 128-entry caches).
//
// A generated banded matrix is split into four blocks of consecutive
// slices, one per core, and all four cores are started in the same cycle
// against one shared memory with random latency and 10 % back-pressure.
// Every row of y is compared bit for bit with the reference. The test counts
// and requires at least once: a slice with no new words (full reuse), a
// slice that loads words, a cache wrap-around, padded entries, memory
// stalls, and all four cores busy at the same time.
module spmv_top_tb;
  import spmv_pkg::*;
  import spmv_tb_pkg::*;

  localparam int unsigned NIP = 4, S = 16, CL = 128, NNZ = 5;
  localparam int unsigned N_ROWS = 1000, BAND = 30, WORDS = 1 << 14;
  localparam int unsigned WATCHDOG = 400000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start [NIP];
  block_desc_t desc  [NIP];
  logic        busy  [NIP], done [NIP];

  logic        rq_v [3*NIP], rq_r [3*NIP], rs_v [3*NIP], rs_r [3*NIP];
  logic [63:0] rq_a [3*NIP], rs_d [3*NIP];
  logic        vq_v [NIP], vq_r [NIP], vs_v [NIP], vs_r [NIP];
  logic        aq_v [NIP], aq_r [NIP], as_v [NIP], as_r [NIP];
  logic        cq_v [NIP], cq_r [NIP], cs_v [NIP], cs_r [NIP];
  addr_t       vq_a [NIP], aq_a [NIP], cq_a [NIP];
  dword_t      vs_d [NIP], as_d [NIP], cs_d [NIP];
  logic        wr_v [NIP], wr_r [NIP];
  logic [63:0] wr_a [NIP], wr_d [NIP];

  spmv_top #(.NUM_IP(NIP), .S(S), .CACHE_LEN(CL), .NNZ_ROW(NNZ)) dut (
    .clk, .rst_n, .start, .desc, .busy, .done,
    .vec_req_valid(vq_v), .vec_req_ready(vq_r), .vec_req_addr(vq_a),
    .vec_resp_valid(vs_v), .vec_resp_ready(vs_r), .vec_resp_data(vs_d),
    .val_req_valid(aq_v), .val_req_ready(aq_r), .val_req_addr(aq_a),
    .val_resp_valid(as_v), .val_resp_ready(as_r), .val_resp_data(as_d),
    .col_req_valid(cq_v), .col_req_ready(cq_r), .col_req_addr(cq_a),
    .col_resp_valid(cs_v), .col_resp_ready(cs_r), .col_resp_data(cs_d),
    .y_wr_valid(wr_v), .y_wr_ready(wr_r), .y_wr_addr(wr_a), .y_wr_data(wr_d)
  );

  // memory read port 3*i+0/1/2 = core i vector/value/index port
  always_comb begin
    for (int i = 0; i < NIP; i++) begin
      rq_v[3*i]   = vq_v[i]; rq_a[3*i]   = vq_a[i]; rs_r[3*i]   = vs_r[i];
      rq_v[3*i+1] = aq_v[i]; rq_a[3*i+1] = aq_a[i]; rs_r[3*i+1] = as_r[i];
      rq_v[3*i+2] = cq_v[i]; rq_a[3*i+2] = cq_a[i]; rs_r[3*i+2] = cs_r[i];
      vq_r[i] = rq_r[3*i];   vs_v[i] = rs_v[3*i];   vs_d[i] = rs_d[3*i];
      aq_r[i] = rq_r[3*i+1]; as_v[i] = rs_v[3*i+1]; as_d[i] = rs_d[3*i+1];
      cq_r[i] = rq_r[3*i+2]; cs_v[i] = rs_v[3*i+2]; cs_d[i] = rs_d[3*i+2];
    end
  end

  ddr_model #(.NRD(3*NIP), .NWR(NIP), .WORDS(WORDS), .LAT_MIN(2), .LAT_MAX(8), .STALL_PCT(10)) u_ddr (
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
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // observation at the ports
  SpmvProblem prob;
  int n_wrap_seen = 0, n_all_busy = 0, cyc = 0;
  int x_loaded [NIP];
  int n_done   [NIP];
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n && prob != null) begin
      bit all_busy;
      all_busy = 1;
      for (int i = 0; i < NIP; i++) begin
        if (start[i]) x_loaded[i] = 0;
        if (vq_v[i] && vq_r[i] && vq_a[i] >= prob.x_base() && vq_a[i] < prob.x_base() + 8 * prob.n_x) begin
          x_loaded[i]++;
          if (x_loaded[i] % CL == 0) n_wrap_seen++;
        end
        if (done[i]) n_done[i]++;
        if (!busy[i]) all_busy = 0;
      end
      if (all_busy) n_all_busy++;
    end
  end

  initial begin
    SpmvProblem p;
    int t_start;
    bit all_done;
    for (int i = 0; i < NIP; i++) begin
      start[i] = 1'b0; desc[i] = '0; x_loaded[i] = 0; n_done[i] = 0;
    end
    p = new(S, CL, NNZ, NIP, N_ROWS, BAND);
    p.generate_matrix();
    p.partition_and_preprocess();
    prob = p;
    check(p.n_errors == 0, "generated matrix fits the cache window");
    check(p.total_w <= WORDS, "memory image fits the model");
    for (longint unsigned w = 0; w < p.total_w; w++) u_ddr.mem[w] = p.image_word(w);
    $display("matrix: %0d rows, %0d slices, %0d stored entries, %0d per core",
             p.n_rows, p.n_slices, p.n_pad * NNZ, p.blk_count[0]);

    repeat (4) @(posedge clk);
    rst_n <= 1'b1;
    repeat (2) @(posedge clk);

    for (int i = 0; i < NIP; i++) begin
      desc[i].hdr_base <= p.blk_hdr(i);
      desc[i].val_base <= p.blk_val(i);
      desc[i].col_base <= p.blk_col(i);
      desc[i].x_base   <= p.x_base();
      desc[i].y_base   <= p.blk_y(i);
      desc[i].n_slices <= p.blk_count[i];
      start[i] <= 1'b1;
    end
    @(posedge clk);
    for (int i = 0; i < NIP; i++) start[i] <= 1'b0;
    t_start = cyc;
    @(posedge clk);
    do begin
      @(posedge clk);
      all_done = 1;
      for (int i = 0; i < NIP; i++) if (busy[i]) all_done = 0;
    end while (!all_done);
    $display("all cores finished after %0d cycles", cyc - t_start);
    repeat (3) @(posedge clk);

    for (int unsigned r = 0; r < p.n_pad; r++) begin
      logic [63:0] got;
      got = u_ddr.mem[p.y_w + r];
      check(got === p.y_ref[r], $sformatf("row %0d: got %h expected %h", r, got, p.y_ref[r]));
    end
    for (int i = 0; i < NIP; i++) check(n_done[i] == 1, $sformatf("core %0d: one done pulse", i));
    check(u_ddr.n_bad_addr == 0, "all accesses inside the memory image");
    check(u_ddr.n_writes == p.n_pad, "one write per row");

    $display("reuse slices %0d, load slices %0d, wraps %0d (seen %0d), padding %0d, stalls %0d, all-busy cycles %0d",
             p.n_reuse_slices, p.n_load_slices, p.n_wraps, n_wrap_seen, p.n_padding, u_ddr.n_stalls, n_all_busy);
    check(p.n_reuse_slices > 0, "a slice reused the cache without loading");
    check(p.n_load_slices > 0, "a slice loaded new words");
    check(n_wrap_seen > 0 && n_wrap_seen == int'(p.n_wraps), "circular caches wrapped as predicted");
    check(p.n_padding > 0, "padded entries present");
    check(u_ddr.n_stalls > 0, "memory back-pressure occurred");
    check(n_all_busy > 0, "all cores ran concurrently");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
