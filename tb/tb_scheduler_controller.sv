// tb_scheduler_controller: tests the controller with an 8-entry queue, the
// compute unit and the three lookup tables around it, but with the runtime
// monitor and the NPU replaced by the testbench. The testbench drives the
// current time and hands the controller layer results (FP16 zero counts,
// with the last-layer flag) after a random delay, holding mon_valid until
// it is taken. Requests arrive at random, often while the queue is full.
// Every dispatch (request, layer, preemption flag), every completion and the
// clock count of every decision are compared with sched_ref_pkg; each
// decision kind (score sweep, idle selection) and preemption must occur.
module tb_scheduler_controller;
  import dysta_pkg::*;
  import fp16_ref_pkg::*;
  import dysta_ref_pkg::*;
  import sched_ref_pkg::*;

  localparam int DEPTH = 8;
  localparam int IDX_W = 3;
  localparam int N_REQ = 150;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, mon_valid, mon_last, mon_ready;
  host_req_t req;
  fp16_t sys_clk, mon_zeros, beta;
  logic q_push_en, q_upd_en, q_score_we, q_pop_en, q_rd_valid, q_full;
  q_entry_t q_push_entry, q_upd_entry, q_rd_entry;
  logic [IDX_W-1:0] q_upd_idx, q_score_idx, q_pop_idx, q_rd_idx, q_free_idx;
  fp16_t q_score;
  logic [IDX_W:0] q_count;
  logic [DEPTH-1:0] q_valid;
  logic [MODEL_W-1:0] lut_model, w_model;
  logic [LAYER_W-1:0] lut_layer, w_layer;
  fp16_t lut_latency, lut_sparsity, lut_shape, w_data;
  logic [2:0] w_en;
  logic cu_in_valid, cu_out_valid;
  cu_mode_e cu_mode, cu_out_mode;
  logic [IDX_W-1:0] cu_in_idx, cu_out_idx;
  fp16_t cu_sys_clk, cu_num_zeros, cu_recip_shape, cu_recip_avg_sparsity, cu_ddl, cu_exe_clk;
  fp16_t cu_recip_norm_iso, cu_avg_lat, cu_coef, cu_coef_o, cu_score_o;
  logic npu_start, done_valid, ev_preempt, ev_coef, ev_sweep_update, ev_sweep_select;
  logic [TAG_W-1:0] npu_tag, done_tag;
  logic [MODEL_W-1:0] npu_model;
  logic [LAYER_W-1:0] npu_layer;

  scheduler_controller #(.DEPTH(DEPTH)) dut (.*);

  request_queue #(.DEPTH(DEPTH)) u_q (
    .clk, .rst_n, .push_en(q_push_en), .push_entry(q_push_entry), .upd_en(q_upd_en),
    .upd_idx(q_upd_idx), .upd_entry(q_upd_entry), .score_we(q_score_we),
    .score_idx(q_score_idx), .score(q_score), .pop_en(q_pop_en), .pop_idx(q_pop_idx),
    .rd_idx(q_rd_idx), .rd_entry(q_rd_entry), .rd_valid(q_rd_valid), .valid(q_valid),
    .count(q_count), .full(q_full), .free_idx(q_free_idx));
  model_lut u_lat (.clk, .we(w_en[0]), .wmodel(w_model), .wlayer(w_layer), .wdata(w_data),
                   .rmodel(lut_model), .rlayer(lut_layer), .rdata(lut_latency));
  model_lut u_sp  (.clk, .we(w_en[1]), .wmodel(w_model), .wlayer(w_layer), .wdata(w_data),
                   .rmodel(lut_model), .rlayer(lut_layer), .rdata(lut_sparsity));
  model_lut u_sh  (.clk, .we(w_en[2]), .wmodel(w_model), .wlayer(w_layer), .wdata(w_data),
                   .rmodel(lut_model), .rlayer(lut_layer), .rdata(lut_shape));
  compute_unit #(.IDX_W(IDX_W)) u_cu (
    .clk, .rst_n, .in_valid(cu_in_valid), .mode(cu_mode), .in_idx(cu_in_idx),
    .num_zeros(cu_num_zeros), .recip_shape(cu_recip_shape),
    .recip_avg_sparsity(cu_recip_avg_sparsity), .sys_clk(cu_sys_clk), .ddl(cu_ddl),
    .exe_clk(cu_exe_clk), .recip_norm_iso(cu_recip_norm_iso), .beta(beta),
    .avg_lat(cu_avg_lat), .coef(cu_coef), .out_valid(cu_out_valid), .out_mode(cu_out_mode),
    .out_idx(cu_out_idx), .coef_o(cu_coef_o), .score_o(cu_score_o));

  sched_ref rf;
  int checks = 0, failures = 0, cycle = 0;
  int n_done = 0, n_preempt = 0, n_upd = 0, n_sel = 0, n_full = 0;
  int accept_cycle = -1, accept_last = 0;
  // request running on the emulated NPU
  bit running = 0;
  int run_layers_left [256];

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("[%0d] FAIL: %s", cycle, msg);
  endtask

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // time: advances by one every 3 clocks
  always @(posedge clk) if (rst_n && cycle % 3 == 2) sys_clk <= real_to_fp16(fp16_to_real(sys_clk) + 1.0);

  always @(posedge clk) if (rst_n) begin
    cycle++;
    if (req_valid && q_full) n_full++;
    if (req_valid && req_ready)
      void'(rf.push(int'(req.tag), int'(req.model), req.score, req.ddl, req.recip_norm_iso, sys_clk));
    if (mon_valid && mon_ready) begin
      int exp_done;
      exp_done = rf.result(mon_zeros, sys_clk, mon_last);
      accept_cycle = cycle;
      accept_last = mon_last;
      if (rf.count() == 0) accept_cycle = -1;  // no decision follows
      checks++;
      if (exp_done == -2) fail("result with nothing running");
      if (exp_done >= 0) begin
        checks++;
        if (!done_valid || int'(done_tag) != exp_done) fail("wrong completion");
        n_done++;
      end else if (done_valid) fail("unexpected done");
    end else if (done_valid) fail("done without result");
    if (ev_sweep_update) n_upd++;
    if (ev_sweep_select) n_sel++;
    if (npu_start) begin
      int slot;
      bit pre;
      slot = rf.decide(beta, pre);
      checks++;
      if (slot < 0) fail("unexpected dispatch");
      else if (int'(npu_tag) != rf.tag[slot] || int'(npu_layer) != rf.layer[slot] ||
               ev_preempt != pre)
        fail($sformatf("dispatch tag %0d layer %0d pre %b, expected %0d %0d %b",
                       npu_tag, npu_layer, ev_preempt, rf.tag[slot], rf.layer[slot], pre));
      if (accept_cycle >= 0) begin
        checks++;
        if (cycle - accept_cycle != (accept_last ? DEPTH + 2 : DEPTH + 4))
          fail($sformatf("decision took %0d clocks", cycle - accept_cycle));
        accept_cycle = -1;
      end
      if (ev_preempt) n_preempt++;
    end
  end

  // emulated NPU + monitor: after a start, wait, then present a layer result
  initial begin
    mon_valid = 0; mon_last = 0; mon_zeros = 0;
    forever begin
      @(negedge clk);
      if (rst_n && npu_start) begin
        int tg;
        tg = int'(npu_tag);
        repeat ($urandom_range(40, 2)) @(negedge clk);
        mon_valid = 1;
        mon_zeros = real_to_fp16(real'($urandom_range(400, 10)) / 1024.0 * 8.0);
        run_layers_left[tg]--;
        mon_last = (run_layers_left[tg] == 0);
        do @(posedge clk); while (!mon_ready);
        @(negedge clk);
        mon_valid = 0;
      end
    end
  end

  task automatic send(int t);
    int m;
    real lat;
    m = $urandom_range(7);
    lat = fp16_to_real(rf.lat[m][0]);
    run_layers_left[t] = 2 + m % 3;
    @(negedge clk);
    req_valid = 1;
    req.tag = TAG_W'(t);
    req.model = MODEL_W'(m);
    req.score = real_to_fp16(lat * (1.0 + 9.0 * fp16_to_real(beta)));
    req.ddl = real_to_fp16(fp16_to_real(sys_clk) + 10.0 * lat);
    req.recip_norm_iso = real_to_fp16(1.0 / (lat * real'($urandom_range(8, 1))));
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    rf = new(DEPTH);
    req_valid = 0; req = '0; sys_clk = 0; beta = 16'h3A00; w_en = 0; w_model = 0; w_layer = 0; w_data = 0;
    repeat (3) @(posedge clk);
    for (int m = 0; m < 8; m++)
      for (int l = 0; l < 64; l++)
        for (int s = 0; s < 3; s++) begin
          fp16_t d;
          d = (s == 0) ? real_to_fp16(real'((5 - l % 5) * 20 + m * 3)) :
              (s == 1) ? real_to_fp16(1.5 + 0.5 * real'(l % 4)) :
                         real_to_fp16(8.0 / real'(1 + m));
          @(negedge clk);
          w_en = 3'(1 << s); w_model = MODEL_W'(m); w_layer = LAYER_W'(l); w_data = d;
          if (s == 0) rf.lat[m][l] = d;
          else if (s == 1) rf.sp[m][l] = d;
          else rf.shp[m][l] = d;
        end
    @(negedge clk);
    w_en = 0;
    rst_n = 1;
    for (int t = 0; t < N_REQ; t++) begin
      if (t % 50 < 25) repeat ($urandom_range(150)) @(negedge clk);
      send(t);
    end
    wait (n_done == N_REQ);
    repeat (10) @(posedge clk);
    begin
      int counts[4];
      counts = '{n_preempt, n_upd, n_sel, n_full};
      foreach (counts[i]) begin
        checks++;
        if (counts[i] == 0) fail($sformatf("mechanism %0d never happened", i));
      end
    end
    $display("completed %0d, preemptions %0d, sweeps %0d, idle selections %0d, full cycles %0d",
             n_done, n_preempt, n_upd, n_sel, n_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
