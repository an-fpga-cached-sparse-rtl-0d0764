// matrix_streamer_tb: streams two slices (S = 8, five entries per row) from
// memory and checks every emitted entry: value, unpacked 16-bit index, row
// (entry mod S) and first flag (entry < S), in storage order.
//
// The first slice runs against a memory that never stalls and must stream
// at one entry per cycle (40 entries plus latency); the second runs with
// 30 % back-pressure on both ports.
module matrix_streamer_tb;
  import spmv_pkg::*;
  localparam int unsigned S = 8, NNZ = 5, TOTAL = S * NNZ;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        start = 1'b0;
  addr_t       val_addr = '0, col_addr = '0;
  logic        busy, done;
  logic        rq_v [2], rq_r [2], rs_v [2], rs_r [2];
  logic [63:0] rq_a [2], rs_d [2];
  logic        wr_v [1], wr_r [1];
  logic [63:0] wr_a [1], wr_d [1];
  logic        out_valid, out_first;
  dword_t      out_val;
  col_t        out_col;
  logic [2:0]  out_row;

  assign wr_v[0] = 1'b0;
  assign wr_a[0] = '0;
  assign wr_d[0] = '0;

  matrix_streamer #(.S(S), .NNZ_ROW(NNZ)) dut (
    .clk, .rst_n, .start, .val_addr, .col_addr, .busy, .done,
    .val_req_valid(rq_v[0]), .val_req_ready(rq_r[0]), .val_req_addr(rq_a[0]),
    .val_resp_valid(rs_v[0]), .val_resp_ready(rs_r[0]), .val_resp_data(rs_d[0]),
    .col_req_valid(rq_v[1]), .col_req_ready(rq_r[1]), .col_req_addr(rq_a[1]),
    .col_resp_valid(rs_v[1]), .col_resp_ready(rs_r[1]), .col_resp_data(rs_d[1]),
    .out_valid, .out_val, .out_col, .out_row, .out_first
  );

  ddr_model #(.NRD(2), .NWR(1), .WORDS(1024), .LAT_MIN(2), .LAT_MAX(5), .STALL_PCT(0)) u_ddr (
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

  typedef struct { logic [63:0] v; logic [15:0] c; int r; bit f; } ent_t;
  ent_t got [$];
  always @(posedge clk) begin
    if (rst_n && out_valid) got.push_back('{out_val, out_col, int'(out_row), out_first});
  end

  localparam int unsigned VAL_W = 64, COL_W_ = 256;   // word addresses of the arrays
  logic [63:0] vals [2*TOTAL];
  logic [15:0] cols [2*TOTAL];

  task automatic run_slice(input int sl, output int cycles);
    int t;
    got.delete();
    val_addr <= (VAL_W + sl * TOTAL) * 8;
    col_addr <= COL_W_ * 8 + sl * TOTAL * 2;
    start <= 1'b1;
    @(posedge clk);
    start <= 1'b0;
    t = 0;
    do begin @(posedge clk); t++; end while (!done);
    cycles = t;
    @(posedge clk);
    check(got.size() == TOTAL, $sformatf("%0d entries emitted", got.size()));
    for (int e = 0; e < got.size() && e < TOTAL; e++) begin
      check(got[e].v === vals[sl*TOTAL+e], $sformatf("entry %0d value", e));
      check(got[e].c === cols[sl*TOTAL+e], $sformatf("entry %0d index", e));
      check(got[e].r == e % S, $sformatf("entry %0d row %0d", e, got[e].r));
      check(got[e].f == (e < S), $sformatf("entry %0d first flag", e));
    end
  endtask

  initial begin
    int c;
    for (int i = 0; i < 2 * TOTAL; i++) begin
      vals[i] = {$urandom, $urandom};
      cols[i] = 16'($urandom);
      u_ddr.mem[VAL_W + i] = vals[i];
    end
    for (int w = 0; w < 2 * TOTAL / 4; w++)
      u_ddr.mem[COL_W_ + w] = {cols[4*w+3], cols[4*w+2], cols[4*w+1], cols[4*w]};
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_slice(0, c);
    check(c <= TOTAL + 5 + 3, $sformatf("slice streamed in %0d cycles", c));
    u_ddr.stall_pct = 30;
    run_slice(1, c);
    check(u_ddr.n_stalls > 0, "back-pressure occurred");
    check(!busy, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
