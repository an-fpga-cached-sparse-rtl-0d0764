// cache_vector_tb: checks the circular-list cache at 64 entries.
//
// Writes 100 random components after a clear, so the write pointer wraps
// and the first 36 entries are overwritten; checks the pointer and then
// reads every entry back, expecting the newest component written there and
// the data exactly one cycle after rd_en. Then clears again and checks that
// the next components land at entries 0, 1, 2.
module cache_vector_tb;
  localparam int unsigned CL = 64;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic        clear = 1'b0, wr_en = 1'b0, rd_en = 1'b0;
  logic [63:0] wr_data = '0, rd_data;
  logic [5:0]  wr_ptr, rd_addr = '0;
  int checks = 0, failures = 0;

  cache_vector #(.CACHE_LEN(CL)) dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [63:0] model [CL];

  task automatic read_check(input int a, input logic [63:0] e);
    rd_en <= 1'b1; rd_addr <= 6'(a);
    @(posedge clk);
    rd_en <= 1'b0;
    rd_addr <= 6'(a + 7);       // a changed address must not disturb the output
    @(posedge clk);
    #1 check(rd_data === e, $sformatf("entry %0d: got %h expected %h", a, rd_data, e));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    for (int i = 0; i < 100; i++) begin
      logic [63:0] v;
      v = {$urandom, $urandom};
      model[i % CL] = v;
      wr_en <= 1'b1; wr_data <= v;
      @(posedge clk);
    end
    wr_en <= 1'b0;
    @(posedge clk);
    #1 check(wr_ptr == 6'(100 % CL), $sformatf("write pointer %0d after 100 writes", wr_ptr));
    for (int a = 0; a < CL; a++) read_check(a, model[a]);
    // restart of the circular list
    clear <= 1'b1;
    @(posedge clk);
    clear <= 1'b0;
    #1 check(wr_ptr == 0, "clear returns the pointer to entry 0");
    for (int i = 0; i < 3; i++) begin
      logic [63:0] v;
      v = {$urandom, $urandom};
      model[i] = v;
      wr_en <= 1'b1; wr_data <= v;
      @(posedge clk);
    end
    wr_en <= 1'b0;
    for (int a = 0; a < 4; a++) read_check(a, model[a]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
