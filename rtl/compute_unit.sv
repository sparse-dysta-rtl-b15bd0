// compute_unit: the scheduler's reconfigurable FP16 compute unit.
//
// One datapath of three multipliers, two adders and two subtractors serves
// both calculations of the dynamic scheduler, selected by `mode`:
//
//   CU_COEF  (sparsity coefficient of the running request)
//            coef  = (num_zeros * recip_shape) * recip_avg_sparsity
//   CU_SCORE (score of one queued request)
//            wait  = sys_clk - exe_clk
//            slack = ddl - sys_clk
//            score = avg_lat * coef + beta * (slack + wait * recip_norm_iso)
//
// The divisions of the dataflow (by the layer shape, by the average
// sparsity and by the normalised isolated time) are multiplications by
// reciprocals computed offline. In coefficient mode only the last two
// multipliers are used: the middle one forms the monitored sparsity and
// feeds, through the input multiplexer, the left one, whose output
// demultiplexer routes the product to `coef`. In score mode the left
// multiplier forms the latency term (alpha = 1) and the demultiplexer sends
// it to the final adder. This mapping follows the compute-unit drawing and
// its two dataflows; the register stage at the output is this design's own.
//
// Timing: inputs are sampled with in_valid; coef/score and out_valid appear
// one clock later together with out_mode and out_idx (a caller-defined tag,
// e.g. the queue slot). One operation can be issued every clock.
module compute_unit
  import dysta_pkg::*;
#(
  parameter int unsigned IDX_W = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  cu_mode_e         mode,
  input  logic [IDX_W-1:0] in_idx,
  // coefficient-mode operands
  input  fp16_t            num_zeros,
  input  fp16_t            recip_shape,
  input  fp16_t            recip_avg_sparsity,
  // score-mode operands
  input  fp16_t            sys_clk,
  input  fp16_t            ddl,
  input  fp16_t            exe_clk,
  input  fp16_t            recip_norm_iso,
  input  fp16_t            beta,
  input  fp16_t            avg_lat,
  input  fp16_t            coef,
  // results
  output logic             out_valid,
  output cu_mode_e         out_mode,
  output logic [IDX_W-1:0] out_idx,
  output fp16_t            coef_o,
  output fp16_t            score_o
);

  fp16_t wait_t, pen, slack, slack_pen;
  fp16_t m0_a, m0_b, m0_y;   // left multiplier
  fp16_t m1_a, m1_b, m1_y;   // middle multiplier
  fp16_t lat_term, coef_d, score_d;

  // top-right group: two subtractors, the third multiplier and one adder
  fp16_add u_sub_wait  (.a(sys_clk), .b(exe_clk), .sub(1'b1), .y(wait_t));
  fp16_mul u_mul_pen   (.a(wait_t),  .b(recip_norm_iso),      .y(pen));
  fp16_add u_sub_slack (.a(ddl),     .b(sys_clk), .sub(1'b1), .y(slack));
  fp16_add u_add_pen   (.a(slack),   .b(pen),     .sub(1'b0), .y(slack_pen));

  // input multiplexers of the two shared multipliers
  always_comb begin
    if (mode == CU_COEF) begin
      m1_a = num_zeros;
      m1_b = recip_shape;
      m0_a = m1_y;
      m0_b = recip_avg_sparsity;
    end else begin
      m1_a = slack_pen;
      m1_b = beta;
      m0_a = avg_lat;
      m0_b = coef;
    end
  end

  fp16_mul u_mul_mid  (.a(m1_a), .b(m1_b), .y(m1_y));
  fp16_mul u_mul_left (.a(m0_a), .b(m0_b), .y(m0_y));

  // output demultiplexer of the left multiplier
  always_comb begin
    coef_d   = (mode == CU_COEF)  ? m0_y : FP16_ZERO;
    lat_term = (mode == CU_SCORE) ? m0_y : FP16_ZERO;
  end

  fp16_add u_add_score (.a(lat_term), .b(m1_y), .sub(1'b0), .y(score_d));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_mode  <= CU_COEF;
      out_idx   <= '0;
      coef_o    <= FP16_ZERO;
      score_o   <= FP16_ZERO;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_mode <= mode;
        out_idx  <= in_idx;
        if (mode == CU_COEF) coef_o  <= coef_d;
        else                 score_o <= score_d;
      end
    end
  end

endmodule
