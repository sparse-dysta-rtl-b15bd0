// dysta_pkg: types and constants shared by the hardware (dynamic) scheduler.
//
// Every value the scheduler computes with (times, latencies, sparsities,
// scores) is an IEEE half-precision number (FP16), as the design prescribes.
// Subnormal numbers are flushed to zero throughout; this, like the field
// widths below, is a choice of this implementation.
//
// Field widths: an 8-bit request tag, 4-bit model-pattern index (16 pairs)
// and 6-bit layer index (64 layers per model). The published description
// gives none of these widths.
package dysta_pkg;

  typedef logic [15:0] fp16_t;

  localparam int unsigned TAG_W   = 8;
  localparam int unsigned MODEL_W = 4;
  localparam int unsigned LAYER_W = 6;

  localparam fp16_t FP16_ZERO = 16'h0000;
  localparam fp16_t FP16_ONE  = 16'h3C00;
  localparam fp16_t FP16_INF  = 16'h7C00;

  // Request as delivered by the first-level (software) scheduler on the host:
  // tag, model-pattern pair, initial score, absolute deadline (arrival time
  // plus latency SLO) and the reciprocal of the normalised isolated time,
  // all times in timer ticks.
  typedef struct packed {
    logic [TAG_W-1:0]   tag;
    logic [MODEL_W-1:0] model;
    fp16_t              score;
    fp16_t              ddl;
    fp16_t              recip_norm_iso;
  } host_req_t;

  // One entry of the request queue (ReqstQ).
  typedef struct packed {
    logic [TAG_W-1:0]   tag;
    logic [MODEL_W-1:0] model;
    logic [LAYER_W-1:0] layer;          // next layer to execute
    fp16_t              score;          // current score (lower runs first)
    fp16_t              ddl;            // absolute deadline
    fp16_t              exe_clk;        // time the request last ran or arrived
    fp16_t              recip_norm_iso; // 1 / normalised isolated time
    fp16_t              coef;           // sparsity coefficient gamma
  } q_entry_t;

  typedef enum logic [1:0] {
    LUT_LATENCY  = 2'd0,   // average remaining latency from layer j on
    LUT_SPARSITY = 2'd1,   // reciprocal of the average sparsity of layer j
    LUT_SHAPE    = 2'd2    // 2^ZERO_SCALE / number of activations of layer j
  } lut_sel_e;

  typedef enum logic {
    CU_COEF  = 1'b0,       // sparsity-coefficient dataflow
    CU_SCORE = 1'b1        // score dataflow
  } cu_mode_e;

  // Ordering key of an FP16 number: unsigned comparison of keys orders the
  // numbers (with -0 just below +0).
  function automatic logic [15:0] fp16_key(fp16_t a);
    return a[15] ? {1'b0, ~a[14:0]} : {1'b1, a[14:0]};
  endfunction

  function automatic logic fp16_lt(fp16_t a, fp16_t b);
    return fp16_key(a) < fp16_key(b);
  endfunction

  // Unsigned integer times 2^-scale, converted to FP16 by truncation.
  // Results above the FP16 range saturate to +inf, below it flush to zero.
  function automatic fp16_t uint_to_fp16(logic [31:0] v, int unsigned scale);
    int          msb;
    int          e;
    logic [31:0] norm;
    msb = -1;
    for (int k = 0; k < 32; k++) if (v[k]) msb = k;
    if (msb < 0) return FP16_ZERO;
    e = msb - int'(scale) + 15;
    if (e >= 31) return FP16_INF;
    if (e <= 0)  return FP16_ZERO;
    norm = v << (31 - msb);
    return {1'b0, e[4:0], norm[30:21]};
  endfunction

endpackage
