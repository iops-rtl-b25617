// fp64_mul: IEEE-754 double-precision multiplier (the "FP Mult" of each PE).
//
// Purely combinational: y = a * b, rounded to nearest, ties to even.
// The 53 x 53-bit significand product is normalised by at most one place,
// then rounded on its guard and sticky bits. Subnormal inputs are treated
// as zero and a result below the normal range is flushed to signed zero;
// a result above it saturates to infinity. NaN and infinity inputs are not
// given any special treatment: sparse-matrix data is assumed finite.
// The reference names the unit and its 64-bit format only; the rounding
// and exception choices above are this implementation's.
module fp64_mul (
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] y
);
  logic        sign;
  logic [10:0] ea, eb;
  logic [105:0] prod, norm;
  logic signed [13:0] exp_s;
  logic [52:0] mant_r;  // 1 + 52 bits after rounding, with carry
  logic        guard, sticky, round_up;

  always_comb begin
    sign   = a[63] ^ b[63];
    ea     = a[62:52];
    eb     = b[62:52];
    prod   = {1'b1, a[51:0]} * {1'b1, b[51:0]};
    exp_s  = $signed({3'b000, ea}) + $signed({3'b000, eb}) - 14'sd1023;
    if (prod[105]) begin
      norm  = prod;
      exp_s = exp_s + 14'sd1;
    end else begin
      norm  = prod << 1;
    end
    guard    = norm[52];
    sticky   = |norm[51:0];
    round_up = guard & (sticky | norm[53]);
    mant_r   = {1'b0, norm[104:53]} + {52'd0, round_up};
    if (mant_r[52]) exp_s = exp_s + 14'sd1;  // rounding carried into a new bit

    if (ea == 11'd0 || eb == 11'd0 || exp_s <= 14'sd0) begin
      y = {sign, 63'd0};
    end else if (exp_s >= 14'sd2047) begin
      y = {sign, 11'h7FF, 52'd0};
    end else begin
      y = {sign, exp_s[10:0], mant_r[51:0]};
    end
  end
endmodule
