// fp64_mul: IEEE-754 double-precision multiplier, two pipeline stages.
//
// The sparse matrix coefficients and the multiplying vector are doubles, so
// every stored entry costs one double multiply. Stage 1 unpacks the operands
// and forms the 106-bit significand product; stage 2 normalises it, rounds
// to nearest-even and packs the result. A new pair is accepted every cycle
// (in_valid) and the product appears FP_MUL_LAT = 2 cycles later (out_valid).
//
// Simplifications, chosen here because the paper does not go below "double
// precision": subnormal inputs are read as zero and results below the normal
// range are flushed to a signed zero; overflow gives a signed infinity;
// any NaN or 0 x inf gives the quiet NaN 0x7ff8000000000000.
module fp64_mul
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

  // ---------------- stage 1: unpack and multiply ----------------
  logic        s1_valid;
  logic        s1_sign;
  logic signed [13:0] s1_exp;     // biased exponent of the product, before normalising
  logic [105:0] s1_prod;
  logic        s1_zero, s1_inf, s1_nan;

  logic [10:0] ea, eb;
  logic        a_zero, b_zero, a_inf, b_inf, a_nan, b_nan;

  always_comb begin
    ea     = a[62:52];
    eb     = b[62:52];
    a_zero = (ea == 11'd0);
    b_zero = (eb == 11'd0);
    a_inf  = (ea == FP_EXP_MAX) && (a[51:0] == 52'd0);
    b_inf  = (eb == FP_EXP_MAX) && (b[51:0] == 52'd0);
    a_nan  = (ea == FP_EXP_MAX) && (a[51:0] != 52'd0);
    b_nan  = (eb == FP_EXP_MAX) && (b[51:0] != 52'd0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
    end else begin
      s1_valid <= in_valid;
    end
  end

  always_ff @(posedge clk) begin
    s1_sign <= a[63] ^ b[63];
    s1_exp  <= $signed({3'b000, ea}) + $signed({3'b000, eb}) - 14'sd1023;
    s1_prod <= {1'b1, a[51:0]} * {1'b1, b[51:0]};
    s1_nan  <= a_nan || b_nan || (a_inf && b_zero) || (b_inf && a_zero);
    s1_inf  <= a_inf || b_inf;
    s1_zero <= a_zero || b_zero;
  end

  // ---------------- stage 2: normalise, round, pack ----------------
  logic [52:0] mant;       // with hidden bit
  logic        guard, sticky, round_up;
  logic [53:0] mant_r;
  logic signed [13:0] exp_n, exp_r;
  logic [63:0] res;

  always_comb begin
    if (s1_prod[105]) begin
      mant   = s1_prod[105:53];
      guard  = s1_prod[52];
      sticky = |s1_prod[51:0];
      exp_n  = s1_exp + 14'sd1;
    end else begin
      mant   = s1_prod[104:52];
      guard  = s1_prod[51];
      sticky = |s1_prod[50:0];
      exp_n  = s1_exp;
    end
    round_up = guard && (sticky || mant[0]);
    mant_r   = {1'b0, mant} + {53'd0, round_up};
    exp_r    = exp_n;
    if (mant_r[53]) begin
      exp_r  = exp_n + 14'sd1;
      mant_r = mant_r >> 1;
    end
    if (s1_nan) begin
      res = FP_QNAN;
    end else if (s1_inf) begin
      res = {s1_sign, FP_EXP_MAX, 52'd0};
    end else if (s1_zero || exp_r <= 14'sd0) begin
      res = {s1_sign, 63'd0};
    end else if (exp_r >= 14'sd2047) begin
      res = {s1_sign, FP_EXP_MAX, 52'd0};
    end else begin
      res = {s1_sign, exp_r[10:0], mant_r[51:0]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
    end else begin
      out_valid <= s1_valid;
    end
  end

  always_ff @(posedge clk) begin
    y <= res;
  end

endmodule
