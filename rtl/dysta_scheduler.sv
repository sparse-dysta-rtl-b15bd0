// dysta_scheduler: the hardware (second-level, dynamic) scheduler for sparse
// multi-DNN workloads, placed between the host CPU and the NPU.
//
// It contains the controller, the runtime sparsity monitor, the
// reconfigurable FP16 compute unit, the request queue and three lookup
// tables (average remaining latency, reciprocal average sparsity and scaled
// reciprocal shape, per model-pattern pair and layer), plus a tick timer
// that supplies the current time. Scheduling happens at layer granularity:
// each time the NPU finishes a layer the scheduler refreshes the sparsity
// coefficient of the request that ran, rescores every queued request and
// starts the next layer of the lowest-scoring one.
//
// Host side: requests (req_valid/req_ready, host_req_t), table writes
// (lut_we, lut_sel, lut_model, lut_layer, lut_data), configuration
// (cfg_beta = the score weight, cfg_tick_div = clocks per time tick) and
// completion reports (done_valid, done_tag).
// NPU side: npu_start with the tag, model and layer to run; the NPU streams
// its output activations (npu_act_valid, npu_act_data) for zero counting and
// pulses npu_layer_done, with npu_layer_last on a request's final layer.
// Off-chip memory traffic of the NPU does not pass through this block.
// The block set and their roles follow the published architecture; port
// names, widths and handshakes are this design's choices.
module dysta_scheduler
  import dysta_pkg::*;
#(
  parameter int unsigned FIFO_DEPTH = 64,
  parameter int unsigned NUM_MODELS = 16,
  parameter int unsigned MAX_LAYERS = 64,
  parameter int unsigned LANES      = 8,
  parameter int unsigned DATA_W     = 8,
  parameter int unsigned ZERO_SCALE = 10,
  localparam int unsigned IDX_W     = (FIFO_DEPTH > 1) ? $clog2(FIFO_DEPTH) : 1
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // host: requests and configuration
  input  logic                         req_valid,
  input  host_req_t                    req,
  output logic                         req_ready,
  input  logic                         lut_we,
  input  lut_sel_e                     lut_sel,
  input  logic [MODEL_W-1:0]           lut_model,
  input  logic [LAYER_W-1:0]           lut_layer,
  input  fp16_t                        lut_data,
  input  fp16_t                        cfg_beta,
  input  logic [31:0]                  cfg_tick_div,
  output logic                         done_valid,
  output logic [TAG_W-1:0]             done_tag,
  output logic [IDX_W:0]               queue_count,
  output fp16_t                        now,
  // NPU
  output logic                         npu_start,
  output logic [TAG_W-1:0]             npu_tag,
  output logic [MODEL_W-1:0]           npu_model,
  output logic [LAYER_W-1:0]           npu_layer,
  input  logic                         npu_act_valid,
  input  logic [LANES-1:0][DATA_W-1:0] npu_act_data,
  input  logic                         npu_layer_done,
  input  logic                         npu_layer_last,
  // events, for observation and performance counting
  output logic                         ev_preempt,
  output logic                         ev_coef,
  output logic                         ev_sweep_update,
  output logic                         ev_sweep_select
);

  logic [31:0] ticks;
  sys_timer u_timer (.clk, .rst_n, .tick_div(cfg_tick_div), .ticks, .now);

  // monitor
  logic        mon_valid, mon_last, mon_ready;
  fp16_t       mon_zeros;
  logic [31:0] mon_count;
  sparsity_monitor #(.LANES(LANES), .DATA_W(DATA_W), .ZERO_SCALE(ZERO_SCALE)) u_monitor (
    .clk, .rst_n,
    .act_valid(npu_act_valid), .act_data(npu_act_data),
    .layer_done(npu_layer_done), .layer_last(npu_layer_last),
    .res_valid(mon_valid), .res_zeros(mon_zeros), .res_count(mon_count),
    .res_last(mon_last), .res_ready(mon_ready));

  // request queue
  logic             q_push_en, q_upd_en, q_score_we, q_pop_en, q_rd_valid, q_full;
  q_entry_t         q_push_entry, q_upd_entry, q_rd_entry;
  logic [IDX_W-1:0] q_upd_idx, q_score_idx, q_pop_idx, q_rd_idx, q_free_idx;
  fp16_t            q_score;
  logic [FIFO_DEPTH-1:0] q_valid;
  request_queue #(.DEPTH(FIFO_DEPTH)) u_queue (
    .clk, .rst_n,
    .push_en(q_push_en), .push_entry(q_push_entry),
    .upd_en(q_upd_en), .upd_idx(q_upd_idx), .upd_entry(q_upd_entry),
    .score_we(q_score_we), .score_idx(q_score_idx), .score(q_score),
    .pop_en(q_pop_en), .pop_idx(q_pop_idx),
    .rd_idx(q_rd_idx), .rd_entry(q_rd_entry), .rd_valid(q_rd_valid),
    .valid(q_valid), .count(queue_count), .full(q_full), .free_idx(q_free_idx));

  // lookup tables
  logic [MODEL_W-1:0] rd_model;
  logic [LAYER_W-1:0] rd_layer;
  fp16_t              lat_q, sp_q, shape_q;
  model_lut #(.NUM_MODELS(NUM_MODELS), .MAX_LAYERS(MAX_LAYERS)) u_lut_latency (
    .clk, .we(lut_we && lut_sel == LUT_LATENCY), .wmodel(lut_model), .wlayer(lut_layer),
    .wdata(lut_data), .rmodel(rd_model), .rlayer(rd_layer), .rdata(lat_q));
  model_lut #(.NUM_MODELS(NUM_MODELS), .MAX_LAYERS(MAX_LAYERS)) u_lut_sparsity (
    .clk, .we(lut_we && lut_sel == LUT_SPARSITY), .wmodel(lut_model), .wlayer(lut_layer),
    .wdata(lut_data), .rmodel(rd_model), .rlayer(rd_layer), .rdata(sp_q));
  model_lut #(.NUM_MODELS(NUM_MODELS), .MAX_LAYERS(MAX_LAYERS)) u_lut_shape (
    .clk, .we(lut_we && lut_sel == LUT_SHAPE), .wmodel(lut_model), .wlayer(lut_layer),
    .wdata(lut_data), .rmodel(rd_model), .rlayer(rd_layer), .rdata(shape_q));

  // compute unit
  logic             cu_in_valid, cu_out_valid;
  cu_mode_e         cu_mode, cu_out_mode;
  logic [IDX_W-1:0] cu_in_idx, cu_out_idx;
  fp16_t            cu_sys_clk, cu_num_zeros, cu_recip_shape, cu_recip_avg_sparsity, cu_ddl, cu_exe_clk;
  fp16_t            cu_recip_norm_iso, cu_avg_lat, cu_coef, cu_coef_o, cu_score_o;
  compute_unit #(.IDX_W(IDX_W)) u_cu (
    .clk, .rst_n, .in_valid(cu_in_valid), .mode(cu_mode), .in_idx(cu_in_idx),
    .num_zeros(cu_num_zeros), .recip_shape(cu_recip_shape),
    .recip_avg_sparsity(cu_recip_avg_sparsity),
    .sys_clk(cu_sys_clk), .ddl(cu_ddl), .exe_clk(cu_exe_clk), .recip_norm_iso(cu_recip_norm_iso),
    .beta(cfg_beta), .avg_lat(cu_avg_lat), .coef(cu_coef),
    .out_valid(cu_out_valid), .out_mode(cu_out_mode), .out_idx(cu_out_idx),
    .coef_o(cu_coef_o), .score_o(cu_score_o));

  scheduler_controller #(.DEPTH(FIFO_DEPTH)) u_ctrl (
    .clk, .rst_n,
    .req_valid, .req, .req_ready, .sys_clk(now),
    .mon_valid, .mon_zeros, .mon_last, .mon_ready,
    .q_push_en, .q_push_entry, .q_upd_en, .q_upd_idx, .q_upd_entry,
    .q_score_we, .q_score_idx, .q_score, .q_pop_en, .q_pop_idx,
    .q_rd_idx, .q_rd_entry, .q_rd_valid, .q_count(queue_count), .q_full,
    .lut_model(rd_model), .lut_layer(rd_layer),
    .lut_latency(lat_q), .lut_sparsity(sp_q), .lut_shape(shape_q),
    .cu_in_valid, .cu_mode, .cu_in_idx, .cu_num_zeros, .cu_recip_shape,
    .cu_recip_avg_sparsity, .cu_sys_clk, .cu_ddl, .cu_exe_clk, .cu_recip_norm_iso, .cu_avg_lat, .cu_coef,
    .cu_out_valid, .cu_out_mode, .cu_out_idx, .cu_coef_o, .cu_score_o,
    .npu_start, .npu_tag, .npu_model, .npu_layer,
    .done_valid, .done_tag,
    .ev_preempt, .ev_coef, .ev_sweep_update, .ev_sweep_select);

endmodule
