// tb_sparsity_monitor: streams random activation beats with a random density
// of zeros, ends layers at random points (including a beat in the same
// clock as layer_done), delays res_ready, and checks the zero count, its
// FP16 form, the last flag, the hold of the result until it is taken and
// the one-clock latency from layer_done to res_valid.
module tb_sparsity_monitor;
  import dysta_pkg::*;
  import dysta_ref_pkg::*;

  localparam int LANES = 8, DATA_W = 8, ZERO_SCALE = 10;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic act_valid, layer_done, layer_last, res_valid, res_last, res_ready;
  logic [LANES-1:0][DATA_W-1:0] act_data;
  fp16_t res_zeros;
  logic [31:0] res_count;
  int checks = 0, failures = 0;

  sparsity_monitor #(.LANES(LANES), .DATA_W(DATA_W), .ZERO_SCALE(ZERO_SCALE)) dut (.*);

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic beat(int pz, output int z);
    act_valid = 1;
    z = 0;
    for (int k = 0; k < LANES; k++) begin
      if ($urandom_range(99) < pz) begin
        act_data[k] = '0;
        z++;
      end else act_data[k] = DATA_W'($urandom_range(255, 1));
    end
  endtask

  initial begin
    act_valid = 0; act_data = '0; layer_done = 0; layer_last = 0; res_ready = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int l = 0; l < 60; l++) begin
      int expected, z, n, pz;
      logic last;
      expected = 0;
      pz = $urandom_range(100);
      n  = (l == 59) ? 9000 : $urandom_range(200, 1);
      for (int b = 0; b < n; b++) begin
        @(negedge clk);
        layer_done = 0;
        if ($urandom_range(3) == 0) begin
          act_valid = 0;
          act_data  = '1;
        end else begin
          beat(pz, z);
          expected += z;
        end
      end
      // final clock of the layer: maybe a beat together with layer_done
      @(negedge clk);
      if ($urandom_range(1)) begin
        beat(pz, z);
        expected += z;
      end else act_valid = 0;
      last = 1'($urandom);
      layer_done = 1;
      layer_last = last;
      @(negedge clk);
      layer_done = 0;
      act_valid  = 0;
      checks++;
      if (!res_valid) begin
        failures++;
        $display("res_valid missing one clock after layer_done");
      end
      repeat ($urandom_range(4)) begin
        @(negedge clk);
        checks++;
        if (!res_valid) failures++;
      end
      checks++;
      if (res_count !== 32'(expected) || res_last !== last ||
          res_zeros !== ref_uint_to_fp16(longint'(expected), ZERO_SCALE)) begin
        failures++;
        $display("layer %0d: count %0d (%h) last %b, expected %0d (%h) %b", l, res_count,
                 res_zeros, res_last, expected, ref_uint_to_fp16(longint'(expected), ZERO_SCALE), last);
      end
      res_ready = 1;
      @(negedge clk);
      res_ready = 0;
      checks++;
      if (res_valid) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
