// slice_mac_tb: drives the multiply-accumulate pipeline with slices of
// S = 8 rows, five entries per row, in column-wise order, against a model of
// the cache vector (32 entries, registered read).
//
// Slice 1 arrives back to back, one entry per cycle, so every row update
// follows the previous update of the same row exactly S cycles later, which
// is the tightest case of the latency hiding; slice 2 arrives with random
// bubbles. After each slice the pipeline must fall idle within its depth,
// and the eight row sums, read through the result port, must equal the
// reference computed in the same order with the simulator's doubles.
module slice_mac_tb;
  import spmv_pkg::*;
  localparam int unsigned S = 8, CL = 32, NNZ = 5;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        in_valid = 1'b0, in_first = 1'b0;
  dword_t      in_val = '0;
  col_t        in_col = '0;
  logic [2:0]  in_row = '0;
  logic        idle;
  logic        cache_rd_en;
  logic [4:0]  cache_rd_addr;
  dword_t      cache_rd_data;
  logic        res_rd_en = 1'b0;
  logic [2:0]  res_rd_addr = '0;
  dword_t      res_rd_data;

  slice_mac #(.S(S), .CACHE_LEN(CL)) dut (.*);

  logic [63:0] xc [CL];
  always @(posedge clk) if (cache_rd_en) cache_rd_data <= xc[cache_rd_addr];

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

  function automatic logic [63:0] rnd_double();
    logic [63:0] v;
    v[63] = 1'($urandom);
    v[62:52] = 11'(1020 + $urandom % 7);
    v[51:0] = {20'($urandom), 32'($urandom)};
    return v;
  endfunction

  task automatic run_slice(input int bubble_pct);
    logic [63:0] v [S*NNZ];
    int          c [S*NNZ];
    int          t;
    for (int e = 0; e < S * NNZ; e++) begin
      v[e] = rnd_double();
      c[e] = $urandom % CL;
    end
    if (bubble_pct == 0) v[3] = 64'h0;   // a padded entry
    for (int e = 0; e < S * NNZ; e++) begin
      while (($urandom % 100) < bubble_pct) begin
        in_valid <= 1'b0;
        @(posedge clk);
      end
      in_valid <= 1'b1;
      in_val   <= v[e];
      in_col   <= 16'(c[e]);
      in_row   <= 3'(e % S);
      in_first <= (e < S);
      @(posedge clk);
    end
    in_valid <= 1'b0;
    t = 0;
    do begin @(posedge clk); t++; end while (!idle && t < 100);
    check(t <= 2 + FP_MUL_LAT + FP_ADD_LAT + 1, $sformatf("pipeline drained in %0d cycles", t));
    for (int r = 0; r < S; r++) begin
      real acc;
      acc = 0.0;
      for (int k = 0; k < NNZ; k++) acc = acc + $bitstoreal(v[k*S+r]) * $bitstoreal(xc[c[k*S+r]]);
      res_rd_en <= 1'b1;
      res_rd_addr <= 3'(r);
      @(posedge clk);
      res_rd_en <= 1'b0;
      @(posedge clk);
      check(res_rd_data === $realtobits(acc),
            $sformatf("row %0d: got %h expected %h", r, res_rd_data, $realtobits(acc)));
    end
  endtask

  initial begin
    for (int i = 0; i < CL; i++) xc[i] = rnd_double();
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    run_slice(0);
    run_slice(40);
    run_slice(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
