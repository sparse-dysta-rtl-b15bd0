// fp16_add: combinational half-precision adder/subtractor.
//
// Used for the two adders and the two subtractors of the scheduler's compute
// unit. y = a + b when sub = 0 and y = a - b when sub = 1. The smaller operand
// is aligned to the larger one with 13 extra low-order bits plus a sticky bit,
// the sum is normalised with a leading-zero count and rounded to nearest,
// ties to even. Subnormals are flushed to zero, overflow gives infinity, an
// exact zero result is +0 and an infinite operand is passed through (no NaN).
// These conventions are choices of this implementation; the design only says
// that the scheduler computes in FP16.
//
// Interface: a, b, sub in; y out, purely combinational (no clock).
module fp16_add
  import dysta_pkg::*;
(
  input  fp16_t a,
  input  fp16_t b,
  input  logic  sub,
  output fp16_t y
);

  fp16_t       bb, hi_op, lo_op;
  logic [4:0]  d5;
  int unsigned d;
  logic [23:0] mb_full;
  logic [23:0] ma, mb;           // significand << 13
  logic [24:0] sum;
  logic        sticky, eff_sub, guard, st, round_up;
  int          lz;
  logic signed [7:0] exp_n, exp_r;
  logic [9:0]  mant;
  logic [10:0] mant_r;

  always_comb begin
    bb = {b[15] ^ sub, b[14:0]};
    // zero out subnormals (flush to zero)
    if (bb[14:10] == 5'h00) bb = {bb[15], 15'd0};
    hi_op   = a;
    if (hi_op[14:10] == 5'h00) hi_op = {hi_op[15], 15'd0};
    lo_op = bb;
    if (bb[14:0] > hi_op[14:0]) begin
      lo_op = hi_op;
      hi_op   = bb;
    end
    eff_sub = hi_op[15] ^ lo_op[15];
    d5      = hi_op[14:10] - lo_op[14:10];
    d       = int'(d5);
    ma      = (hi_op[14:10]   == 5'h00) ? 24'd0 : {1'b1, hi_op[9:0],   13'd0};
    mb_full = (lo_op[14:10] == 5'h00) ? 24'd0 : {1'b1, lo_op[9:0], 13'd0};
    if (d >= 24) begin
      mb     = 24'd0;
      sticky = |mb_full;
    end else begin
      mb     = mb_full >> d;
      sticky = |(mb_full & ((24'd1 << d) - 24'd1));
    end
    mb[0] = mb[0] | sticky;
    sum   = eff_sub ? ({1'b0, ma} - {1'b0, mb}) : ({1'b0, ma} + {1'b0, mb});
    exp_n = $signed({3'b000, hi_op[14:10]});
    lz    = 0;
    if (sum[24]) begin
      st    = sum[0];
      sum   = sum >> 1;
      sum[0] = sum[0] | st;
      exp_n = exp_n + 8'sd1;
    end else begin
      for (int k = 23; k >= 0; k--) begin
        if (sum[k]) begin
          lz = 23 - k;
          break;
        end
      end
      sum   = sum << lz;
      exp_n = exp_n - 8'(lz);
    end
    mant     = sum[22:13];
    guard    = sum[12];
    st       = |sum[11:0];
    round_up = guard & (st | mant[0]);
    mant_r   = {1'b0, mant} + {10'd0, round_up};
    exp_r    = exp_n + (mant_r[10] ? 8'sd1 : 8'sd0);

    if (hi_op[14:10] == 5'h1F)
      y = {hi_op[15], FP16_INF[14:0]};
    else if (sum == 25'd0)
      y = FP16_ZERO;
    else if (exp_r >= 8'sd31)
      y = {hi_op[15], FP16_INF[14:0]};
    else if (exp_r <= 8'sd0)
      y = {hi_op[15], 15'd0};
    else
      y = {hi_op[15], exp_r[4:0], mant_r[9:0]};
  end

endmodule
