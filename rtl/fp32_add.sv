// fp32_add: IEEE-754 single-precision adder, used in the adder trees and the
// accumulators of the MAC tree tiles.
//
// Purely combinational. The operand of larger magnitude is kept, the other one
// is aligned to it with guard, round and sticky bits, the significands are
// added or subtracted, the result is renormalised (leading-zero count after a
// cancellation) and rounded to nearest, ties to even. Zero and subnormal
// operands count as zero, a result below the normal range is flushed to zero,
// an exact cancellation gives +0 and overflow saturates to infinity; NaN is
// not handled. FP32 arithmetic follows the paper; rounding and the special
// cases are this design's choice.
module fp32_add (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic [31:0] x, z;          // |x| >= |z|
  logic [7:0]  ex, ez, d;
  logic [26:0] mx, mz, mz_sh; // 24-bit significand + guard, round, sticky
  logic        sticky;
  logic [27:0] sum;
  logic [4:0]  lz;
  logic signed [9:0] e;
  logic [23:0] mant;
  logic        g, rs, rnd;
  logic [24:0] mant_r;

  always_comb begin
    if (a[30:0] >= b[30:0]) begin x = a; z = b; end
    else                    begin x = b; z = a; end
    ex = x[30:23];
    ez = z[30:23];
    mx = (ex == 8'd0) ? 27'd0 : {1'b1, x[22:0], 3'b000};
    mz = (ez == 8'd0) ? 27'd0 : {1'b1, z[22:0], 3'b000};
    d  = ex - ez;
    if (d >= 8'd27) begin
      mz_sh  = 27'd0;
      sticky = |mz;
    end else begin
      mz_sh  = mz >> d;
      sticky = |(mz & ((27'd1 << d) - 27'd1));
    end
    mz_sh[0] = mz_sh[0] | sticky;
    e = 10'(signed'({2'b0, ex}));
    if (x[31] == z[31]) sum = {1'b0, mx} + {1'b0, mz_sh};
    else                sum = {1'b0, mx} - {1'b0, mz_sh};
    // normalise
    lz = 5'd0;
    if (sum[27]) begin
      sum = {1'b0, sum[27:2], sum[1] | sum[0]};
      e   = e + 10'sd1;
    end else begin
      for (int i = 26; i >= 0; i--) begin
        if (sum[i]) begin
          lz = 5'(26 - i);
          break;
        end
      end
      sum = sum << lz;
      e   = e - 10'(lz);
    end
    mant = sum[26:3];
    g    = sum[2];
    rs   = sum[1] | sum[0];
    rnd  = g & (rs | mant[0]);
    mant_r = {1'b0, mant} + 25'(rnd);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      e      = e + 10'sd1;
    end
    if (mx == 27'd0)
      y = 32'd0;
    else if (sum == 28'd0 || e <= 0)
      y = 32'd0;
    else if (e >= 10'sd255)
      y = {x[31], 8'hFF, 23'd0};
    else
      y = {x[31], e[7:0], mant_r[22:0]};
  end
endmodule
