// scheduler_controller: control of the hardware (second-level) scheduler.
//
// The controller does the four jobs the design gives it:
//  1. accepts requests (tag, model, initial score, deadline, reciprocal of
//     the normalised isolated time) from the software first-level scheduler
//     and stores them in the request queue;
//  2. when the runtime monitor reports the zero count of a finished layer of
//     the running request, computes that request's sparsity coefficient
//     gamma = (zeros / shape) / average layer sparsity ("last-one" rule) on
//     the compute unit and records it, with the next layer index and the
//     current time;
//  3. recomputes the score of every queued request on the compute unit,
//       score = avg_remaining_latency * gamma
//             + beta * ((ddl - now) + (now - exe_clk) * recip_norm_iso);
//  4. dispatches the request with the lowest score to the NPU for its next
//     layer. A different request than the one that just ran is a
//     preemption at layer granularity.
// When the NPU is idle and requests are waiting, the controller dispatches
// by the stored scores without recomputing them, so a fresh request is
// ordered by the initial score the first-level scheduler gave it. When the
// final layer of a request ends, the request leaves the queue and its tag is
// reported on done_valid/done_tag.
//
// Timing: a score sweep visits all DEPTH slots, one per clock, with the
// compute unit's one-clock latency, so a decision takes DEPTH + 2 clocks
// after a final layer and DEPTH + 4 after any other layer. One time value,
// sampled when the controller leaves its idle state, serves as the time t of
// the whole decision (all scores and the updated exe_clk). Requests are
// accepted (req_ready) only while the controller is idle and the queue is
// not full. The order of the steps is the published algorithm's; the state
// machine, the handshakes and the sweep order are this design's choices.
module scheduler_controller
  import dysta_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned IDX_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // requests from the first-level scheduler (host)
  input  logic               req_valid,
  input  host_req_t          req,
  output logic               req_ready,
  input  fp16_t              sys_clk,
  // runtime monitor
  input  logic               mon_valid,
  input  fp16_t              mon_zeros,
  input  logic               mon_last,
  output logic               mon_ready,
  // request queue
  output logic               q_push_en,
  output q_entry_t           q_push_entry,
  output logic               q_upd_en,
  output logic [IDX_W-1:0]   q_upd_idx,
  output q_entry_t           q_upd_entry,
  output logic               q_score_we,
  output logic [IDX_W-1:0]   q_score_idx,
  output fp16_t              q_score,
  output logic               q_pop_en,
  output logic [IDX_W-1:0]   q_pop_idx,
  output logic [IDX_W-1:0]   q_rd_idx,
  input  q_entry_t           q_rd_entry,
  input  logic               q_rd_valid,
  input  logic [IDX_W:0]     q_count,
  input  logic               q_full,
  // lookup tables (one read address shared by the three tables)
  output logic [MODEL_W-1:0] lut_model,
  output logic [LAYER_W-1:0] lut_layer,
  input  fp16_t              lut_latency,
  input  fp16_t              lut_sparsity,
  input  fp16_t              lut_shape,
  // compute unit
  output logic               cu_in_valid,
  output cu_mode_e           cu_mode,
  output logic [IDX_W-1:0]   cu_in_idx,
  output fp16_t              cu_num_zeros,
  output fp16_t              cu_recip_shape,
  output fp16_t              cu_recip_avg_sparsity,
  output fp16_t              cu_sys_clk,
  output fp16_t              cu_ddl,
  output fp16_t              cu_exe_clk,
  output fp16_t              cu_recip_norm_iso,
  output fp16_t              cu_avg_lat,
  output fp16_t              cu_coef,
  input  logic               cu_out_valid,
  input  cu_mode_e           cu_out_mode,
  input  logic [IDX_W-1:0]   cu_out_idx,
  input  fp16_t              cu_coef_o,
  input  fp16_t              cu_score_o,
  // NPU control
  output logic               npu_start,
  output logic [TAG_W-1:0]   npu_tag,
  output logic [MODEL_W-1:0] npu_model,
  output logic [LAYER_W-1:0] npu_layer,
  // completion report to the host
  output logic               done_valid,
  output logic [TAG_W-1:0]   done_tag,
  // events, for observation
  output logic               ev_preempt,
  output logic               ev_coef,
  output logic               ev_sweep_update,
  output logic               ev_sweep_select
);

  typedef enum logic [2:0] {
    S_IDLE, S_COEF, S_COEF_WB, S_SWEEP, S_DRAIN, S_DISPATCH
  } state_e;

  state_e           state;
  logic             cur_valid;
  logic [IDX_W-1:0] cur_idx;
  logic             prev_valid;
  logic [IDX_W-1:0] prev_idx;
  fp16_t            zeros_r;
  fp16_t            t_r;      // time t of the current decision
  logic [IDX_W-1:0] sweep_i;
  logic             sweep_update;
  logic             min_found;
  logic [IDX_W-1:0] min_idx;
  fp16_t            min_score;

  // candidate for the running minimum in this clock
  logic             cand_valid;
  logic [IDX_W-1:0] cand_idx;
  fp16_t            cand_score;

  always_comb begin
    q_rd_idx = cur_idx;
    unique case (state)
      S_SWEEP:    q_rd_idx = sweep_i;
      S_DISPATCH: q_rd_idx = min_idx;
      default:    q_rd_idx = cur_idx;
    endcase
  end

  always_comb begin
    req_ready = (state == S_IDLE) && !mon_valid && !q_full;
    mon_ready = (state == S_IDLE);

    q_push_en    = (state == S_IDLE) && !mon_valid && req_valid && !q_full;
    q_push_entry = '{tag: req.tag, model: req.model, layer: '0, score: req.score,
                     ddl: req.ddl, exe_clk: sys_clk, recip_norm_iso: req.recip_norm_iso,
                     coef: FP16_ONE};

    q_pop_en  = (state == S_IDLE) && mon_valid && mon_last && cur_valid;
    q_pop_idx = cur_idx;

    done_valid = q_pop_en;
    done_tag   = q_rd_entry.tag;

    q_upd_en    = (state == S_COEF_WB) && cu_out_valid;
    q_upd_idx   = cur_idx;
    q_upd_entry = q_rd_entry;
    q_upd_entry.coef    = cu_coef_o;
    q_upd_entry.layer   = q_rd_entry.layer + 1'b1;
    q_upd_entry.exe_clk = t_r;

    lut_model = q_rd_entry.model;
    lut_layer = q_rd_entry.layer;

    cu_in_valid           = 1'b0;
    cu_mode               = CU_SCORE;
    cu_in_idx             = q_rd_idx;
    cu_num_zeros          = zeros_r;
    cu_recip_shape        = lut_shape;
    cu_recip_avg_sparsity = lut_sparsity;
    cu_sys_clk            = t_r;
    cu_ddl                = q_rd_entry.ddl;
    cu_exe_clk            = q_rd_entry.exe_clk;
    cu_recip_norm_iso     = q_rd_entry.recip_norm_iso;
    cu_avg_lat            = lut_latency;
    cu_coef               = q_rd_entry.coef;
    if (state == S_COEF) begin
      cu_in_valid = 1'b1;
      cu_mode     = CU_COEF;
    end else if (state == S_SWEEP && sweep_update && q_rd_valid) begin
      cu_in_valid = 1'b1;
    end

    cand_valid = 1'b0;
    cand_idx   = cu_out_idx;
    cand_score = cu_score_o;
    if ((state == S_SWEEP || state == S_DRAIN) && sweep_update) begin
      cand_valid = cu_out_valid && (cu_out_mode == CU_SCORE);
    end else if (state == S_SWEEP && !sweep_update) begin
      cand_valid = q_rd_valid;
      cand_idx   = sweep_i;
      cand_score = q_rd_entry.score;
    end

    q_score_we  = cand_valid && sweep_update;
    q_score_idx = cu_out_idx;
    q_score     = cu_score_o;

    npu_start  = (state == S_DISPATCH) && min_found;
    npu_tag    = q_rd_entry.tag;
    npu_model  = q_rd_entry.model;
    npu_layer  = q_rd_entry.layer;
    ev_preempt = npu_start && prev_valid && (prev_idx != min_idx);
    ev_coef    = q_upd_en;
    ev_sweep_update = (state == S_DRAIN) && sweep_update;
    ev_sweep_select = (state == S_DRAIN) && !sweep_update;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cur_valid    <= 1'b0;
      cur_idx      <= '0;
      prev_valid   <= 1'b0;
      prev_idx     <= '0;
      zeros_r      <= FP16_ZERO;
      t_r          <= FP16_ZERO;
      sweep_i      <= '0;
      sweep_update <= 1'b0;
      min_found    <= 1'b0;
      min_idx      <= '0;
      min_score    <= FP16_ZERO;
    end else begin
      if (cand_valid && (!min_found || fp16_lt(cand_score, min_score))) begin
        min_found <= 1'b1;
        min_idx   <= cand_idx;
        min_score <= cand_score;
      end
      unique case (state)
        S_IDLE: begin
          t_r <= sys_clk;
          if (mon_valid) begin
            if (mon_last) begin
              cur_valid    <= 1'b0;
              prev_valid   <= 1'b0;
              sweep_update <= 1'b1;
              sweep_i      <= '0;
              min_found    <= 1'b0;
              state        <= S_SWEEP;
            end else begin
              zeros_r <= mon_zeros;
              state   <= S_COEF;
            end
          end else if (!q_push_en && !cur_valid && q_count != '0) begin
            sweep_update <= 1'b0;
            sweep_i      <= '0;
            min_found    <= 1'b0;
            state        <= S_SWEEP;
          end
        end
        S_COEF:    state <= S_COEF_WB;
        S_COEF_WB: begin
          sweep_update <= 1'b1;
          sweep_i      <= '0;
          min_found    <= 1'b0;
          state        <= S_SWEEP;
        end
        S_SWEEP: begin
          if (sweep_i == IDX_W'(DEPTH - 1)) state <= S_DRAIN;
          else sweep_i <= sweep_i + 1'b1;
        end
        S_DRAIN:   state <= S_DISPATCH;
        S_DISPATCH: begin
          if (min_found) begin
            cur_valid  <= 1'b1;
            cur_idx    <= min_idx;
            prev_valid <= 1'b1;
            prev_idx   <= min_idx;
          end
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_start_valid: assert property (@(posedge clk) disable iff (!rst_n)
    npu_start |-> q_rd_valid);
  a_result_has_request: assert property (@(posedge clk) disable iff (!rst_n)
    (mon_valid && mon_ready) |-> cur_valid);

endmodule
