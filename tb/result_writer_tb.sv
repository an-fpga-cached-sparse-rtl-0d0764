// result_writer_tb: copies two sets of S = 8 row sums from a model of the
// partial-sum memory (registered read) to memory and checks the written
// words and addresses. The first copy sees no back-pressure and must take
// about one cycle per row; the second sees 40 % back-pressure.
module result_writer_tb;
  import spmv_pkg::*;
  localparam int unsigned S = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0;
  addr_t       y_addr = '0;
  logic        busy, done;
  logic        res_rd_en;
  logic [2:0]  res_rd_addr;
  dword_t      res_rd_data;
  logic        rq_v [1], rq_r [1], rs_v [1], rs_r [1];
  logic [63:0] rq_a [1], rs_d [1];
  logic        wr_v [1], wr_r [1];
  logic [63:0] wr_a [1], wr_d [1];

  assign rq_v[0] = 1'b0;
  assign rq_a[0] = '0;
  assign rs_r[0] = 1'b1;

  result_writer #(.S(S)) dut (
    .clk, .rst_n, .start, .y_addr, .busy, .done,
    .res_rd_en, .res_rd_addr, .res_rd_data,
    .wr_valid(wr_v[0]), .wr_ready(wr_r[0]), .wr_addr(wr_a[0]), .wr_data(wr_d[0])
  );

  ddr_model #(.NRD(1), .NWR(1), .WORDS(1024), .STALL_PCT(0)) u_ddr (
    .clk,
    .rd_req_valid(rq_v), .rd_req_ready(rq_r), .rd_req_addr(rq_a),
    .rd_resp_valid(rs_v), .rd_resp_ready(rs_r), .rd_resp_data(rs_d),
    .wr_valid(wr_v), .wr_ready(wr_r), .wr_addr(wr_a), .wr_data(wr_d)
  );

  logic [63:0] acc [S];
  always @(posedge clk) if (res_rd_en) res_rd_data <= acc[res_rd_addr];

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

  task automatic copy(input int base_w, output int cycles);
    int t, w0;
    for (int r = 0; r < S; r++) acc[r] = {$urandom, $urandom};
    w0 = u_ddr.n_writes;
    y_addr <= base_w * 8;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t = 0;
    do begin @(posedge clk); t++; end while (!done);
    cycles = t;
    @(posedge clk);
    check(u_ddr.n_writes - w0 == S, $sformatf("%0d writes", u_ddr.n_writes - w0));
    for (int r = 0; r < S; r++)
      check(u_ddr.mem[base_w + r] === acc[r], $sformatf("row %0d", r));
    check(u_ddr.mem[base_w + S] === 64'h0, "no write past the slice");
  endtask

  initial begin
    int c;
    for (int i = 0; i < 1024; i++) u_ddr.mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    copy(100, c);
    check(c <= S + 4, $sformatf("copy took %0d cycles", c));
    u_ddr.stall_pct = 40;
    copy(300, c);
    check(u_ddr.n_stalls > 0, "back-pressure occurred");
    check(!busy, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
