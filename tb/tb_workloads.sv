// tb_workloads: the scheduler at its default sizes running two multi-DNN
// mixes shaped like the ones such a scheduler is meant for.
//
//   phase A, attention models: 3 model-pattern pairs with 12, 24 and 12
//            layers (BERT-base, BART encoder+decoder, GPT-2 small);
//   phase B, CNNs: 4 models x 3 pruning patterns = 12 pairs with 54, 16, 28
//            and 35 layers (ResNet-50, VGG-16, MobileNet, SSD300).
//
// The layer counts are those of the standard networks; per-layer latencies,
// sparsities and the arrival process are synthetic and scaled down so that
// the run stays short (a layer here lasts 20-60 activation beats). Both
// mixes share one lookup-table load (pairs 0-2 and 3-14). Requests arrive
// with random gaps and a latency SLO of 10x, 20x or 40x the model's average
// latency. As in tb_dysta_scheduler, a transaction-level reference checks
// every dispatch, completion and decision time; at the end the test reports
// the SLO violation rate and the average normalised turnaround time (ANTT)
// of each phase. These two figures are reported, not checked: they depend on
// the synthetic workload. Each mechanism (completion, preemption,
// coefficient update, score sweep) must occur in each phase.
module tb_workloads;
  import dysta_pkg::*;
  import fp16_ref_pkg::*;
  import dysta_ref_pkg::*;
  import sched_ref_pkg::*;

  localparam int DEPTH = 64;
  localparam int LANES = 8, DATA_W = 8;
  localparam int TICK_DIV = 16;
  localparam int N_ATT = 40, N_CNN = 60;

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

  dysta_scheduler dut (.*);

  sched_ref rf;
  int checks = 0, failures = 0;
  int cycle = 0, accept_cycle = -1;
  bit accept_last = 0;
  int npu_zeros = 0, npu_busy_starts = 0;
  int n_done = 0, n_preempt = 0, n_coef = 0, n_upd = 0;
  int arrive_cycle[256], iso_cycles[256], slo_cycles[256];
  int ph_done, ph_viol;
  real ph_ntt;

  task automatic fail(string msg);
    failures++;
    if (failures < 20) $display("[%0d] FAIL: %s", cycle, msg);
  endtask

  // ---------------------------------------------------------------- workload
  function automatic int nlayers(int m);
    int cnn[4] = '{54, 16, 28, 35};
    if (m == 1) return 24;
    if (m < 3)  return 12;
    return cnn[(m - 3) / 3];
  endfunction

  // Pruning pattern of a CNN pair (0 random, 1 N:M, 2 channel-wise) scales
  // the layer's work; attention pairs use pattern 0.
  function automatic int pattern(int m);
    return (m < 3) ? 0 : (m - 3) % 3;
  endfunction

  function automatic int beats_of(int m, int l, int tg);
    return 20 + (tg * 7 + l * 13 + pattern(m) * 9) % 40;
  endfunction

  // ------------------------------------------------------------- NPU stand-in
  initial begin
    npu_act_valid = 0; npu_act_data = '0; npu_layer_done = 0; npu_layer_last = 0;
    forever begin
      @(negedge clk);
      if (rst_n && npu_start) begin
        int beats, pz, z, m, l, tg;
        m = int'(npu_model); l = int'(npu_layer); tg = int'(npu_tag);
        @(posedge clk);
        beats = beats_of(m, l, tg);
        pz = 30 + (tg * 37 + l * 11) % 50;
        z = 0;
        for (int b = 0; b < beats; b++) begin
          @(negedge clk);
          npu_act_valid = 1;
          for (int k = 0; k < LANES; k++) begin
            if ($urandom_range(99) < pz) begin
              npu_act_data[k] = '0;
              z++;
            end else npu_act_data[k] = DATA_W'($urandom_range(2 ** DATA_W - 1, 1));
          end
        end
        @(negedge clk);
        npu_act_valid  = 0;
        npu_zeros      = z;
        npu_layer_done = 1;
        npu_layer_last = (l >= nlayers(m) - 1);
        @(negedge clk);
        npu_layer_done = 0;
        npu_layer_last = 0;
      end
    end
  end

  always @(negedge clk) if (npu_start && (npu_act_valid || npu_layer_done)) npu_busy_starts++;

  // ---------------------------------------------------------------- watchdog
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // --------------------------------------------------------------- observer
  always @(posedge clk) if (rst_n) begin
    cycle++;
    if (req_valid && req_ready) begin
      void'(rf.push(int'(req.tag), int'(req.model), req.score, req.ddl, req.recip_norm_iso, now));
      arrive_cycle[req.tag] = cycle;
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
        int turnaround;
        checks++;
        if (!done_valid || int'(done_tag) != exp_done)
          fail($sformatf("done tag %0d expected %0d", done_tag, exp_done));
        turnaround = cycle - arrive_cycle[exp_done];
        ph_ntt += real'(turnaround) / real'(iso_cycles[exp_done]);
        if (turnaround > slo_cycles[exp_done]) ph_viol++;
        ph_done++;
        n_done++;
      end else if (done_valid) fail("unexpected done");
    end else if (done_valid) fail("done without layer result");
    if (ev_coef) n_coef++;
    if (ev_sweep_update) n_upd++;
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
  task automatic lut_write(lut_sel_e s, int m, int l, fp16_t d);
    @(negedge clk);
    lut_we = 1; lut_sel = s; lut_model = MODEL_W'(m); lut_layer = LAYER_W'(l); lut_data = d;
  endtask

  // Average clocks of one layer: mean beats plus the decision overhead.
  function automatic real layer_clocks();
    return 40.0 + real'(DEPTH) + 8.0;
  endfunction

  task automatic send_request(int t, int m);
    real lat, slo, beta;
    int mult;
    mult = (t % 3 == 0) ? 10 : (t % 3 == 1) ? 20 : 40;
    lat  = fp16_to_real(rf.lat[m][0]);
    slo  = real'(mult) * lat;
    beta = fp16_to_real(cfg_beta);
    iso_cycles[t] = int'(real'(nlayers(m)) * layer_clocks());
    slo_cycles[t] = mult * iso_cycles[t];
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

  task automatic run_phase(string name, int first, int n, int m_lo, int m_hi, int gap);
    int c0, p0, u0;
    ph_done = 0; ph_viol = 0; ph_ntt = 0.0;
    c0 = n_coef; p0 = n_preempt; u0 = n_upd;
    for (int t = first; t < first + n; t++) begin
      repeat ($urandom_range(gap)) @(negedge clk);
      send_request(t, $urandom_range(m_hi, m_lo));
    end
    wait (ph_done == n);
    repeat (20) @(posedge clk);
    $display("%s: %0d requests, SLO violations %0d (%0.1f%%), ANTT %0.2f, preemptions %0d",
             name, n, ph_viol, 100.0 * real'(ph_viol) / real'(n), ph_ntt / real'(n),
             n_preempt - p0);
    checks++;
    if (queue_count != 0) fail($sformatf("%s: queue not empty at the end", name));
    checks++;
    if (n_preempt == p0) fail($sformatf("%s: no preemption", name));
    checks++;
    if (n_coef == c0) fail($sformatf("%s: no coefficient update", name));
    checks++;
    if (n_upd == u0) fail($sformatf("%s: no score sweep", name));
  endtask

  initial begin
    rf = new(DEPTH);
    req_valid = 0; req = '0; lut_we = 0; lut_sel = LUT_LATENCY; lut_model = 0; lut_layer = 0;
    lut_data = 0; cfg_beta = 16'h3800; cfg_tick_div = TICK_DIV;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Latency table in ticks: remaining layers x average layer time; the
    // sparsity table holds 1 / average zero fraction of the layer; the shape
    // table 2^10 / (average beats x LANES).
    for (int m = 0; m < 16; m++)
      for (int l = 0; l < 64; l++) begin
        fp16_t lat, sp, sh;
        int nl;
        nl  = (m < 15) ? nlayers(m) : 1;
        lat = (l < nl) ? real_to_fp16(real'(nl - l) * layer_clocks() / TICK_DIV) : 16'h0000;
        sp  = real_to_fp16(1.0 / (0.30 + 0.01 * real'((l * 11) % 50)));
        sh  = real_to_fp16(1024.0 / (40.0 * LANES));
        lut_write(LUT_LATENCY, m, l, lat);
        lut_write(LUT_SPARSITY, m, l, sp);
        lut_write(LUT_SHAPE, m, l, sh);
        rf.lat[m][l] = lat; rf.sp[m][l] = sp; rf.shp[m][l] = sh;
      end
    @(negedge clk);
    lut_we = 0;
    run_phase("attention mix", 0, N_ATT, 0, 2, 2500);
    run_phase("CNN mix", N_ATT, N_CNN, 3, 14, 5000);
    checks++;
    if (npu_busy_starts != 0) fail("NPU started while busy");
    checks++;
    if (n_done != N_ATT + N_CNN) fail("not every request completed");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
