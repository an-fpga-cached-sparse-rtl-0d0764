// fp64_add: IEEE-754 double-precision adder, two pipeline stages.
//
// Used to accumulate the products of a row into its partial sum. Stage 1
// orders the operands by magnitude, aligns the smaller significand with
// three extra guard/round/sticky bits and adds or subtracts; stage 2 counts
// leading zeros, normalises, rounds to nearest-even and packs. One addition
// is accepted per cycle (in_valid); the sum appears FP_ADD_LAT = 2 cycles
// later (out_valid).
//
// Same simplifications as fp64_mul, which the paper leaves open: subnormals
// are read as zero and tiny results flush to zero; an exact cancellation
// gives +0; +0 + -0 gives +0 and -0 + -0 gives -0; NaN operands or
// inf - inf give the quiet NaN 0x7ff8000000000000.
module fp64_add
  import spmv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic        out_valid,
  output logic [63:0] y
);

  // ---------------- stage 1: order, align, add ----------------
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;
  logic        swap;
  logic [63:0] x, z;            // |x| >= |z|
  logic [10:0] ex, ez;
  logic [55:0] mx, mz0, mz;
  logic [10:0] d;
  logic        sticky_al;
  logic [56:0] sum;
  logic [55:0] lost_mask;

  always_comb begin
    a_zero = (a[62:52] == 11'd0);
    b_zero = (b[62:52] == 11'd0);
    a_inf  = (a[62:52] == FP_EXP_MAX) && (a[51:0] == 52'd0);
    b_inf  = (b[62:52] == FP_EXP_MAX) && (b[51:0] == 52'd0);
    a_nan  = (a[62:52] == FP_EXP_MAX) && (a[51:0] != 52'd0);
    b_nan  = (b[62:52] == FP_EXP_MAX) && (b[51:0] != 52'd0);

    swap = (b_zero ? 63'd0 : b[62:0]) > (a_zero ? 63'd0 : a[62:0]);
    x    = swap ? b : a;
    z    = swap ? a : b;
    ex   = x[62:52];
    ez   = z[62:52];
    mx   = (ex == 11'd0) ? 56'd0 : {1'b1, x[51:0], 3'b000};
    mz0  = (ez == 11'd0) ? 56'd0 : {1'b1, z[51:0], 3'b000};
    d    = ex - ez;
    if (d >= 11'd56) begin
      mz        = {55'd0, |mz0};
      lost_mask = '0;
      sticky_al = 1'b0;
    end else begin
      lost_mask = ~(56'hff_ffff_ffff_ffff << d[5:0]);
      sticky_al = |(mz0 & lost_mask);
      mz        = (mz0 >> d[5:0]) | {55'd0, sticky_al};
    end
    if (x[63] ^ z[63]) sum = {1'b0, mx} - {1'b0, mz};
    else               sum = {1'b0, mx} + {1'b0, mz};
  end

  logic        s1_valid;
  logic        s1_sign;
  logic [10:0] s1_exp;
  logic [56:0] s1_sum;
  logic        s1_nan, s1_inf, s1_inf_sign, s1_both_zero, s1_zero_sign;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid;
  end

  always_ff @(posedge clk) begin
    s1_sign      <= x[63];
    s1_exp       <= ex;
    s1_sum       <= sum;
    s1_nan       <= a_nan || b_nan || (a_inf && b_inf && (a[63] != b[63]));
    s1_inf       <= a_inf || b_inf;
    s1_inf_sign  <= a_inf ? a[63] : b[63];
    s1_both_zero <= a_zero && b_zero;
    s1_zero_sign <= a[63] && b[63];
  end

  // ---------------- stage 2: normalise, round, pack ----------------
  logic [5:0]  lz;
  logic        lz_found;
  logic [55:0] n;
  logic signed [12:0] exp_n, exp_r;
  logic [52:0] mant;
  logic        guard, sticky, round_up;
  logic [53:0] mant_r;
  logic [63:0] res;

  always_comb begin
    lz       = 6'd0;
    lz_found = 1'b0;
    for (int i = 55; i >= 0; i--) begin
      if (!lz_found && s1_sum[i]) begin
        lz       = 6'(55 - i);
        lz_found = 1'b1;
      end
    end
    if (s1_sum[56]) begin
      n     = {s1_sum[56:2], s1_sum[1] | s1_sum[0]};
      exp_n = $signed({2'b00, s1_exp}) + 13'sd1;
    end else begin
      n     = s1_sum[55:0] << lz;
      exp_n = $signed({2'b00, s1_exp}) - $signed({7'd0, lz});
    end
    mant     = n[55:3];
    guard    = n[2];
    sticky   = n[1] | n[0];
    round_up = guard && (sticky || mant[0]);
    mant_r   = {1'b0, mant} + {53'd0, round_up};
    exp_r    = exp_n;
    if (mant_r[53]) begin
      exp_r  = exp_n + 13'sd1;
      mant_r = mant_r >> 1;
    end
    if (s1_nan) begin
      res = FP_QNAN;
    end else if (s1_inf) begin
      res = {s1_inf_sign, FP_EXP_MAX, 52'd0};
    end else if (s1_both_zero) begin
      res = {s1_zero_sign, 63'd0};
    end else if (s1_sum == 57'd0) begin
      res = FP_ZERO;
    end else if (exp_r <= 13'sd0) begin
      res = {s1_sign, 63'd0};
    end else if (exp_r >= 13'sd2047) begin
      res = {s1_sign, FP_EXP_MAX, 52'd0};
    end else begin
      res = {s1_sign, exp_r[10:0], mant_r[51:0]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= s1_valid;
  end

  always_ff @(posedge clk) begin
    y <= res;
  end

endmodule
