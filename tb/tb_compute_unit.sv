// tb_compute_unit: drives the reconfigurable compute unit in both modes with
// random operands, one operation per clock with random gaps, and compares
// coef/score with the per-operation reference model. Also checks the
// one-clock latency and that mode and index travel with the result.
module tb_compute_unit;
  import dysta_pkg::*;
  import fp16_ref_pkg::*;
  import dysta_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, out_valid;
  cu_mode_e mode, out_mode;
  logic [5:0] in_idx, out_idx;
  fp16_t num_zeros, recip_shape, recip_avg_sparsity, sys_clk, ddl, exe_clk;
  fp16_t recip_norm_iso, beta, avg_lat, coef, coef_o, score_o;
  int checks = 0, failures = 0;
  int n_coef = 0, n_score = 0;

  compute_unit #(.IDX_W(6)) dut (.*);

  // expected result of the operation issued in the previous clock
  logic exp_v;
  cu_mode_e exp_mode;
  logic [5:0] exp_idx;
  fp16_t exp_val;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_valid = 0; mode = CU_COEF; in_idx = 0;
    {num_zeros, recip_shape, recip_avg_sparsity, sys_clk, ddl, exe_clk} = '0;
    {recip_norm_iso, beta, avg_lat, coef} = '0;
    exp_v = 0; exp_mode = CU_COEF; exp_idx = 0; exp_val = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      // check the result of the previous issue
      checks++;
      if (out_valid !== exp_v) begin
        failures++;
        $display("out_valid %b expected %b", out_valid, exp_v);
      end
      if (exp_v) begin
        checks++;
        if (out_mode !== exp_mode || out_idx !== exp_idx ||
            !fp16_same(exp_mode == CU_COEF ? coef_o : score_o, exp_val)) begin
          failures++;
          if (failures < 10)
            $display("mode %0d idx %0d: got %h/%h expected %h", exp_mode, out_idx, coef_o, score_o, exp_val);
        end
      end
      // issue the next operation
      in_valid = ($urandom_range(3) != 0);
      mode     = cu_mode_e'($urandom_range(1));
      in_idx   = 6'($urandom);
      num_zeros          = rand_fp16(10, 24);
      recip_shape        = rand_fp16(5, 14);  recip_shape[15] = 0;
      recip_avg_sparsity = rand_fp16(14, 17); recip_avg_sparsity[15] = 0;
      sys_clk  = rand_fp16(15, 24); sys_clk[15] = 0;
      ddl      = rand_fp16(15, 25); ddl[15] = 0;
      exe_clk  = rand_fp16(12, 24); exe_clk[15] = 0;
      recip_norm_iso = rand_fp16(5, 14); recip_norm_iso[15] = 0;
      beta     = rand_fp16(10, 16); beta[15] = 0;
      avg_lat  = rand_fp16(12, 24); avg_lat[15] = 0;
      coef     = rand_fp16(13, 16); coef[15] = 0;
      exp_v    = in_valid;
      exp_mode = mode;
      exp_idx  = in_idx;
      if (mode == CU_COEF) exp_val = ref_coef(num_zeros, recip_shape, recip_avg_sparsity);
      else exp_val = ref_score(sys_clk, ddl, exe_clk, recip_norm_iso, beta, avg_lat, coef);
      if (in_valid) begin
        if (mode == CU_COEF) n_coef++;
        else n_score++;
      end
    end
    checks++;
    if (n_coef == 0 || n_score == 0) failures++;
    $display("coef ops %0d, score ops %0d", n_coef, n_score);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
