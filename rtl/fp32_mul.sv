// fp32_mul: IEEE-754 single-precision multiplier, one lane of a MAC tree tile.
//
// Purely combinational; the caller registers the result. The 24x24-bit
// significand product is normalised by at most one place and rounded to
// nearest, ties to even, using a guard bit and a sticky bit. Zero and
// subnormal operands give a signed zero, results below the normal range are
// flushed to signed zero and results above it saturate to infinity. NaN is not
// produced or propagated. The paper specifies FP32 data and only states that a
// multiplier costs three DSP slices; rounding and special-value handling are
// this design's choice, picked for CNN data that is always finite.
module fp32_mul (
  input  logic [31:0] a,
  input  logic [31:0] b,
  output logic [31:0] y
);
  logic        sign;
  logic [7:0]  ea, eb;
  logic [47:0] prod;
  logic [23:0] mant;
  logic        guard, sticky, rnd;
  logic [24:0] mant_r;
  logic signed [10:0] exp_n;

  always_comb begin
    sign  = a[31] ^ b[31];
    ea    = a[30:23];
    eb    = b[30:23];
    prod  = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    if (prod[47]) begin
      mant   = prod[47:24];
      guard  = prod[23];
      sticky = |prod[22:0];
      exp_n  = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd126;
    end else begin
      mant   = prod[46:23];
      guard  = prod[22];
      sticky = |prod[21:0];
      exp_n  = 11'(signed'({3'b0, ea})) + 11'(signed'({3'b0, eb})) - 11'sd127;
    end
    rnd    = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 25'(rnd);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_n  = exp_n + 11'sd1;
    end
    if (ea == 8'd0 || eb == 8'd0 || exp_n <= 0)
      y = {sign, 31'd0};
    else if (exp_n >= 11'sd255)
      y = {sign, 8'hFF, 23'd0};
    else
      y = {sign, exp_n[7:0], mant_r[22:0]};
  end
endmodule
