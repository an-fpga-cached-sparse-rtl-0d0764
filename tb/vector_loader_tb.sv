// vector_loader_tb: loads words of S = 8 components into a captured cache
// write stream and compares them with the vector in memory.
//
// Three loads: 3 words from element 24 with a memory that never stalls
// (its duration is checked against one component per cycle plus latency),
// 0 words (must finish at once without a memory access), and 5 words from
// element 8 with 30 % back-pressure.
module vector_loader_tb;
  import spmv_pkg::*;
  localparam int unsigned S = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0;
  logic [31:0] offset = '0;
  logic [15:0] nwords = '0;
  addr_t       x_base = 64'h400;
  logic        busy, done;
  logic        rq_v [1], rq_r [1], rs_v [1], rs_r [1];
  logic [63:0] rq_a [1], rs_d [1];
  logic        wr_v [1], wr_r [1];
  logic [63:0] wr_a [1], wr_d [1];
  logic        cache_wr_en;
  dword_t      cache_wr_data;

  assign wr_v[0] = 1'b0;
  assign wr_a[0] = '0;
  assign wr_d[0] = '0;

  vector_loader #(.S(S)) dut (
    .clk, .rst_n, .start, .offset, .nwords, .x_base, .busy, .done,
    .rd_req_valid(rq_v[0]), .rd_req_ready(rq_r[0]), .rd_req_addr(rq_a[0]),
    .rd_resp_valid(rs_v[0]), .rd_resp_ready(rs_r[0]), .rd_resp_data(rs_d[0]),
    .cache_wr_en, .cache_wr_data
  );

  ddr_model #(.NRD(1), .NWR(1), .WORDS(1024), .LAT_MIN(3), .LAT_MAX(3), .STALL_PCT(0)) u_ddr (
    .clk,
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_ready(rs_r), .rd_resp_data(rs_d),
    .wr_valid(wr_v), .wr_ready(wr_r), .wr_addr(wr_a), .wr_data(wr_d)
  );

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] got [$];
  int n_done = 0;
  always @(posedge clk) begin
    if (rst_n && cache_wr_en) got.push_back(cache_wr_data);
    if (rst_n && done) n_done++;
  end

  task automatic load(input int off, input int nw, output int cycles);
    int t;
    got.delete();
    offset <= 32'(off); nwords <= 16'(nw); start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t = 0;
    do begin @(posedge clk); t++; end while (!done);
    cycles = t;
    @(posedge clk);
    check(got.size() == nw * S, $sformatf("%0d components written, expected %0d", got.size(), nw * S));
    for (int i = 0; i < got.size() && i < nw * S; i++)
      check(got[i] === u_ddr.mem[(x_base >> 3) + off + i], $sformatf("component %0d", i));
  endtask

  initial begin
    int c, reads;
    for (int i = 0; i < 128; i++) u_ddr.mem[(x_base >> 3) + i] = {$urandom, $urandom};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    load(24, 3, c);
    check(c <= 3 * S + 3 + 3, $sformatf("24 components took %0d cycles", c));
    reads = u_ddr.n_reads;
    load(0, 0, c);
    check(c <= 2, $sformatf("empty load took %0d cycles", c));
    check(u_ddr.n_reads == reads, "empty load made no access");
    u_ddr.stall_pct = 30;
    load(8, 5, c);
    check(u_ddr.n_stalls > 0, "back-pressure occurred");
    check(n_done == 3, "one done pulse per load");
    check(!busy, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
