// tb_dysta_scheduler: end-to-end test of the whole scheduler at its default
// sizes (64-entry request queue, 16 model-pattern pairs x 64 layers).
//
// A host process plays the software first-level scheduler: it fills the
// three lookup tables, then issues requests whose initial score is
// Lat + beta * (SLO - Lat) with SLO = 10 x Lat, first spread out in time and
// then as a burst large enough to fill the queue. A behavioural NPU runs the
// dispatched layers and streams activations with request-dependent sparsity.
// A transaction-level reference (sched_ref_pkg) predicts every dispatch
// (request, layer, whether it preempts), every completion and the number of
// clocks each decision takes. The test also requires each mechanism to occur
// at least once: preemption, coefficient update, score sweep after a layer,
// selection by stored scores while the NPU is idle, queue-full back-pressure
// and request completion.
module tb_dysta_scheduler;
  import dysta_pkg::*;
  import fp16_ref_pkg::*;
  import dysta_ref_pkg::*;
  import sched_ref_pkg::*;

  localparam int DEPTH = 64;
  localparam int LANES = 8, DATA_W = 8;
  localparam int N_SPREAD = 40, N_BURST = 80;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, lut_we, done_valid;
  host_req_t req;
  lut_sel_e lut_sel;
  logic [MODEL_W-1:0] lut_model;
  logic [LAYER_W-1:0] lut_layer;
  fp16_t lut_data, cfg_beta, now;
  logic [31:0] cfg_tick_div;
  logic [TAG_W-1:0] done_tag;
  logic [$clog2(DEPTH):0] queue_count;
  logic npu_start, npu_act_valid, npu_layer_done, npu_layer_last;
  logic [TAG_W-1:0] npu_tag;
  logic [MODEL_W-1:0] npu_model;
  logic [LAYER_W-1:0] npu_layer;
  logic [LANES-1:0][DATA_W-1:0] npu_act_data;
  logic ev_preempt, ev_coef, ev_sweep_update, ev_sweep_select;
  int npu_zeros, npu_errors;

  dysta_scheduler dut (.*);

  npu_model #(.LANES(LANES), .DATA_W(DATA_W)) u_npu (
    .clk, .rst_n, .start(npu_start), .tag(npu_tag), .model(npu_model), .layer(npu_layer),
    .act_valid(npu_act_valid), .act_data(npu_act_data), .layer_done(npu_layer_done),
    .layer_last(npu_layer_last), .zeros_out(npu_zeros), .start_errors(npu_errors));

  sched_ref rf;
  int checks = 0, failures = 0;
  int n_push = 0, n_done = 0, n_preempt = 0, n_coef = 0, n_upd = 0, n_sel = 0, n_full = 0;
  int cycle = 0, accept_cycle = -1, accept_last = 0;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("[%0d] FAIL: %s", cycle, msg);
  endtask

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------------- observer
  always @(posedge clk) if (rst_n) begin
    cycle++;
    if (req_valid && !req_ready && queue_count == ($clog2(DEPTH) + 1)'(DEPTH)) n_full++;
    if (req_valid && req_ready) begin
      void'(rf.push(int'(req.tag), int'(req.model), req.score, req.ddl, req.recip_norm_iso, now));
      n_push++;
    end
    if (dut.mon_valid && dut.mon_ready) begin
      int exp_done;
      exp_done = rf.result(ref_uint_to_fp16(longint'(npu_zeros), 10), now, dut.mon_last);
      accept_cycle = cycle;
      accept_last  = dut.mon_last;
      if (rf.count() == 0) accept_cycle = -1;  // no decision follows
      checks++;
      if (exp_done == -2) fail("layer result with no running request");
      if (exp_done >= 0) begin
        checks++;
        if (!done_valid || int'(done_tag) != exp_done)
          fail($sformatf("done tag %0d expected %0d", done_tag, exp_done));
        n_done++;
      end else if (done_valid) fail("unexpected done");
    end else if (done_valid) fail("done without layer result");
    if (ev_coef) n_coef++;
    if (ev_sweep_update) n_upd++;
    if (ev_sweep_select) n_sel++;
    if (npu_start) begin
      int slot;
      bit pre;
      slot = rf.decide(cfg_beta, pre);
      checks++;
      if (slot < 0) fail("dispatch not expected");
      else if (int'(npu_tag) != rf.tag[slot] || int'(npu_model) != rf.model[slot] ||
               int'(npu_layer) != rf.layer[slot] || ev_preempt != pre)
        fail($sformatf("dispatch tag %0d layer %0d pre %b, expected tag %0d layer %0d pre %b",
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

  // ------------------------------------------------------- host / static level
  function automatic int nlayers(int m);
    return 3 + m % 4;
  endfunction

  task automatic lut_write(lut_sel_e s, int m, int l, fp16_t d);
    @(negedge clk);
    lut_we = 1; lut_sel = s; lut_model = MODEL_W'(m); lut_layer = LAYER_W'(l); lut_data = d;
  endtask

  task automatic send_request(int t);
    int m;
    real lat, slo, beta;
    m = $urandom_range(15);
    lat  = fp16_to_real(rf.lat[m][0]);
    slo  = 10.0 * lat;
    beta = fp16_to_real(cfg_beta);
    @(negedge clk);
    req_valid = 1;
    req.tag   = TAG_W'(t);
    req.model = MODEL_W'(m);
    req.score = real_to_fp16(lat + beta * (slo - lat));
    req.ddl   = real_to_fp16(fp16_to_real(now) + slo);
    req.recip_norm_iso = real_to_fp16(1.0 / (lat * real'(queue_count + 1)));
    do @(posedge clk); while (!req_ready);
    @(negedge clk);
    req_valid = 0;
  endtask

  initial begin
    rf = new(DEPTH);
    req_valid = 0; req = '0; lut_we = 0; lut_sel = LUT_LATENCY; lut_model = 0; lut_layer = 0;
    lut_data = 0; cfg_beta = 16'h3800; cfg_tick_div = 4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 16; m++)
      for (int l = 0; l < 64; l++) begin
        fp16_t lat, sp, sh;
        lat = (l < nlayers(m)) ? real_to_fp16(real'((nlayers(m) - l) * 25 + m)) : 16'h0000;
        sp  = real_to_fp16(2.0 + 0.25 * m);
        sh  = real_to_fp16(1024.0 / 320.0);
        lut_write(LUT_LATENCY, m, l, lat);
        lut_write(LUT_SPARSITY, m, l, sp);
        lut_write(LUT_SHAPE, m, l, sh);
        rf.lat[m][l] = lat; rf.sp[m][l] = sp; rf.shp[m][l] = sh;
      end
    @(negedge clk);
    lut_we = 0;
    // spread-out arrivals
    for (int t = 0; t < N_SPREAD; t++) begin
      repeat ($urandom_range(400)) @(negedge clk);
      send_request(t);
    end
    // burst that overfills the queue
    for (int t = N_SPREAD; t < N_SPREAD + N_BURST; t++) send_request(t % 256);
    wait (n_done == N_SPREAD + N_BURST);
    repeat (20) @(posedge clk);
    checks++;
    if (queue_count != 0) fail("queue not empty at the end");
    checks++;
    if (npu_errors != 0) fail("NPU started while busy");
    $display("requests %0d, completed %0d, preemptions %0d, coefficient updates %0d",
             n_push, n_done, n_preempt, n_coef);
    $display("score sweeps %0d, idle selections %0d, queue-full cycles %0d", n_upd, n_sel, n_full);
    begin
      int counts[7];
      counts = '{n_push, n_done, n_preempt, n_coef, n_upd, n_sel, n_full};
      foreach (counts[i]) begin
        checks++;
        if (counts[i] == 0) fail($sformatf("mechanism %0d never happened", i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
