// tb_request_queue: random pushes, whole-entry updates, score writes and
// pops against a shadow model of the slots; checks valid bits, count, full,
// the lowest-free-slot rule and the contents read back from every slot.
module tb_request_queue;
  import dysta_pkg::*;

  localparam int DEPTH = 16;
  localparam int IDX_W = $clog2(DEPTH);

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic push_en, upd_en, score_we, pop_en, rd_valid, full;
  q_entry_t push_entry, upd_entry, rd_entry;
  logic [IDX_W-1:0] upd_idx, score_idx, pop_idx, rd_idx, free_idx;
  fp16_t score;
  logic [DEPTH-1:0] valid;
  logic [IDX_W:0] count;

  q_entry_t sh [DEPTH];
  logic [DEPTH-1:0] sh_v;
  int checks = 0, failures = 0, n_full = 0;

  request_queue #(.DEPTH(DEPTH)) dut (.*);

  function automatic q_entry_t rand_entry();
    q_entry_t e;
    e = q_entry_t'({$urandom, $urandom, $urandom, $urandom});
    return e;
  endfunction

  function automatic int sh_free();
    for (int k = 0; k < DEPTH; k++) if (!sh_v[k]) return k;
    return 0;
  endfunction

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    push_en = 0; upd_en = 0; score_we = 0; pop_en = 0;
    push_entry = '0; upd_entry = '0; upd_idx = 0; score_idx = 0; score = 0; pop_idx = 0; rd_idx = 0;
    sh_v = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int op, pushes;
      @(negedge clk);
      // compare state
      checks++;
      if (valid !== sh_v || count !== ($countones(sh_v)) || full !== (&sh_v) ||
          (!full && free_idx !== IDX_W'(sh_free()))) begin
        failures++;
        $display("state mismatch valid %h/%h count %0d", valid, sh_v, count);
      end
      for (int k = 0; k < DEPTH; k++) begin
        rd_idx = IDX_W'(k);
        #0.1;
        if (sh_v[k]) begin
          checks++;
          if (rd_entry !== sh[k] || !rd_valid) failures++;
        end
      end
      if (full) n_full++;
      push_en = 0; upd_en = 0; score_we = 0; pop_en = 0;
      // fill more often in the first half, drain in the second
      pushes = (i < 1500) ? 6 : 2;
      op = $urandom_range(9);
      if (op < pushes && !full) begin
        push_en = 1;
        push_entry = rand_entry();
        sh[sh_free()] = push_entry;
        sh_v[sh_free()] = 1;
      end else if (op == 7) begin
        upd_en = 1;
        upd_idx = IDX_W'($urandom);
        upd_entry = rand_entry();
        sh[upd_idx] = upd_entry;
      end else if (op == 8) begin
        score_we = 1;
        score_idx = IDX_W'($urandom);
        score = 16'($urandom);
        sh[score_idx].score = score;
      end else begin
        pop_en = 1;
        pop_idx = IDX_W'($urandom);
        sh_v[pop_idx] = 0;
      end
    end
    checks++;
    if (n_full == 0) begin
      failures++;
      $display("queue never became full");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
