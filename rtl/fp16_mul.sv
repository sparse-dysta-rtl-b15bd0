// fp16_mul: combinational half-precision multiplier.
//
// One of the three multipliers of the scheduler's compute unit (the "X"
// boxes). The 11x11-bit significand product is normalised and rounded to
// nearest, ties to even. Subnormal inputs count as zero and results below the
// normal range flush to zero; results above it become infinity. NaN is not
// produced: an infinite operand gives an infinite result. FP16 is the data
// type the design names; the rounding and exception handling are choices of
// this implementation.
//
// Interface: a, b in; y = a*b out, purely combinational (no clock).
module fp16_mul
  import dysta_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  output fp16_t y
);

  logic        sign;
  logic [21:0] prod;
  logic [9:0]  mant;
  logic        guard, sticky, round_up;
  logic [10:0] mant_r;           // rounded mantissa with carry bit
  logic signed [7:0] exp_n;      // biased exponent after normalisation
  logic signed [7:0] exp_r;      // after rounding carry

  always_comb begin
    sign  = a[15] ^ b[15];
    prod  = {1'b1, a[9:0]} * {1'b1, b[9:0]};
    exp_n = $signed({3'b000, a[14:10]}) + $signed({3'b000, b[14:10]}) - 8'sd15;
    if (prod[21]) begin
      mant   = prod[20:11];
      guard  = prod[10];
      sticky = |prod[9:0];
      exp_n  = exp_n + 8'sd1;
    end else begin
      mant   = prod[19:10];
      guard  = prod[9];
      sticky = |prod[8:0];
    end
    round_up = guard & (sticky | mant[0]);
    mant_r   = {1'b0, mant} + {10'd0, round_up};
    exp_r    = exp_n + (mant_r[10] ? 8'sd1 : 8'sd0);

    if (a[14:10] == 5'h1F || b[14:10] == 5'h1F)
      y = {sign, FP16_INF[14:0]};
    else if (a[14:10] == 5'h00 || b[14:10] == 5'h00)
      y = {sign, 15'd0};
    else if (exp_r >= 8'sd31)
      y = {sign, FP16_INF[14:0]};
    else if (exp_r <= 8'sd0)
      y = {sign, 15'd0};
    else
      y = {sign, exp_r[4:0], mant_r[9:0]};
  end

endmodule
