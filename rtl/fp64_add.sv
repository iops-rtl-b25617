// fp64_add: IEEE-754 double-precision adder (the "FP Add" of the PE and of
// the address-mapping unit).
//
// Purely combinational: y = a + b, rounded to nearest, ties to even.
// The operand of larger magnitude is kept, the other is shifted right by
// the exponent difference into a field with guard, round and sticky bits.
// After the add or subtract the sum is normalised (one place right, or left
// by its leading-zero count) and rounded. Subnormal inputs count as zero,
// results below the normal range flush to zero, exact cancellation gives +0.
// The reference names the unit and its 64-bit format only; everything
// about the rounding is this implementation's choice.
module fp64_add (
  input  logic [63:0] a,
  input  logic [63:0] b,
  output logic [63:0] y
);
  logic        a_big;
  logic [63:0] x, z;            // x: larger magnitude, z: smaller
  logic [10:0] ex, ez, dexp;
  logic [55:0] mx, mz, mz_sh;   // 1 + 52 + guard/round/sticky
  logic        st;
  logic [56:0] sum;
  logic signed [12:0] e_s;
  logic [5:0]  lz;
  logic        found;
  logic        round_up;
  logic [53:0] mant_r;
  logic        sub;

  always_comb begin
    a_big = (a[62:0] >= b[62:0]);
    x     = a_big ? a : b;
    z     = a_big ? b : a;
    ex    = x[62:52];
    ez    = z[62:52];
    sub   = x[63] ^ z[63];
    mx    = {1'b1, x[51:0], 3'b000};
    mz    = {1'b1, z[51:0], 3'b000};
    dexp  = ex - ez;
    if (dexp > 11'd55) begin
      mz_sh = 56'd0;
      st    = 1'b1;
    end else begin
      mz_sh = mz >> dexp;
      st    = |(mz & ~({56{1'b1}} << dexp));
    end
    mz_sh[0] = mz_sh[0] | st;
    sum   = sub ? ({1'b0, mx} - {1'b0, mz_sh}) : ({1'b0, mx} + {1'b0, mz_sh});
    e_s   = $signed({2'b00, ex});
    lz    = 6'd0;
    found = 1'b0;
    if (sum[56]) begin
      sum = {1'b0, sum[56:2], sum[1] | sum[0]};
      e_s = e_s + 13'sd1;
    end else begin
      for (int i = 55; i >= 0; i--) begin
        if (!found && sum[i]) found = 1'b1;
        else if (!found) lz = lz + 6'd1;
      end
      sum = sum << lz;
      e_s = e_s - $signed({7'd0, lz});
    end
    // sum[55] is the hidden bit, sum[54:3] the fraction, sum[2:0] G,R,S
    round_up = sum[2] & ((|sum[1:0]) | sum[3]);
    mant_r   = {1'b0, sum[55:3]} + {53'd0, round_up};
    if (mant_r[53]) begin
      mant_r = mant_r >> 1;
      e_s    = e_s + 13'sd1;
    end

    if (ez == 11'd0) begin
      y = (ex == 11'd0) ? 64'd0 : x;
    end else if (sum[55:0] == 56'd0 || e_s <= 13'sd0) begin
      y = 64'd0;
    end else if (e_s >= 13'sd2047) begin
      y = {x[63], 11'h7FF, 52'd0};
    end else begin
      y = {x[63], e_s[10:0], mant_r[51:0]};
    end
  end
endmodule
