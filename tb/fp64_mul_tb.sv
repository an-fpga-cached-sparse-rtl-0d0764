// fp64_mul_tb: checks the double multiplier bit for bit against the simulator's
// own IEEE double arithmetic (round to nearest-even) on random operands,
// with extra weight on significands that round near a tie, plus zero,
// infinity, NaN, overflow and underflow cases. It also
// checks the two-cycle latency and the one-per-cycle rate.
module fp64_mul_tb;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0;
  logic [63:0] a = '0, b = '0;
  logic out_valid;
  logic [63:0] y;
  int checks = 0, failures = 0;

  fp64_mul dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [63:0] rnd_num(input int emin, input int emax);
    logic [63:0] v;
    v[63]    = 1'($urandom);
    v[62:52] = 11'(1023 + emin + int'($urandom % 32'(emax - emin + 1)));
    v[51:0]  = {20'($urandom), 32'($urandom)};
    return v;
  endfunction

  // Expected queue, filled when an operation is issued.
  logic [63:0] exp_q[$];
  int          issue_cycle[$];
  int          cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  always @(posedge clk) begin
    if (in_valid) issue_cycle.push_back(cycle);
    if (rst_n && out_valid) begin
      logic [63:0] e;
      int c;
      e = exp_q.pop_front();
      c = issue_cycle.pop_front();
      checks++;
      if (y !== e) begin
        failures++;
        if (failures < 10) $display("mismatch: got %h expected %h", y, e);
      end
      checks++;
      if (cycle - c != 2) begin
        failures++;
        $display("latency %0d, expected 2", cycle - c);
      end
    end
  end

  task automatic issue(input logic [63:0] x0, input logic [63:0] x1, input logic [63:0] e);
    a <= x0; b <= x1; in_valid <= 1'b1;
    exp_q.push_back(e);
    @(posedge clk);
  endtask

  function automatic logic [63:0] ref_mul(input logic [63:0] x0, input logic [63:0] x1);
    return $realtobits($bitstoreal(x0) * $bitstoreal(x1));
  endfunction

  initial begin
    logic [63:0] p, q;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    // special cases
    p = rnd_num(-3, 3);
    issue(64'h0, p, {p[63], 63'd0});                             // 0 * p -> signed zero
    issue(p, 64'h3ff0_0000_0000_0000, p);                        // p * 1
    issue(64'h7ff0_0000_0000_0000, p, {p[63], 11'h7ff, 52'd0});  // inf * p
    issue(64'h7ff0_0000_0000_0000, 64'h0, 64'h7ff8_0000_0000_0000); // inf * 0
    issue(64'h7fe0_0000_0000_0000, 64'h4000_0000_0000_0000, 64'h7ff0_0000_0000_0000); // overflow
    issue(64'h0010_0000_0000_0000, 64'h3fe0_0000_0000_0000, 64'h0); // underflow flushed
    // random, back to back
    for (int i = 0; i < 20000; i++) begin
      case (i % 4)
        0: begin p = rnd_num(-60, 60); q = rnd_num(-60, 60); end
        1: begin p = rnd_num(0, 0); q = rnd_num(0, 1); end
        2: begin p = rnd_num(-2, 2); q = 64'h3ff0_0000_0000_0000; q[3:0] = 4'($urandom); end
        default: begin p = rnd_num(-500, 500); q = rnd_num(-500, 500); end
      endcase
      issue(p, q, ref_mul(p, q));
    end
    in_valid <= 1'b0;
    repeat (5) @(posedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("%0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
