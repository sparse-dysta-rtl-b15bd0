// tb_model_lut: fills a lookup table with a pattern derived from the
// address, reads every entry back, then overwrites random entries and reads
// random addresses against a shadow copy.
module tb_model_lut;
  import dysta_pkg::*;

  localparam int NM = 16, NL = 64;

  logic clk = 0;
  always #5 clk = ~clk;

  logic we;
  logic [MODEL_W-1:0] wmodel, rmodel;
  logic [LAYER_W-1:0] wlayer, rlayer;
  fp16_t wdata, rdata;
  fp16_t shadow [NM][NL];
  int checks = 0, failures = 0;

  model_lut #(.NUM_MODELS(NM), .MAX_LAYERS(NL)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; wmodel = 0; wlayer = 0; wdata = 0; rmodel = 0; rlayer = 0;
    for (int m = 0; m < NM; m++)
      for (int l = 0; l < NL; l++) begin
        @(negedge clk);
        we = 1; wmodel = MODEL_W'(m); wlayer = LAYER_W'(l);
        wdata = fp16_t'(m * 1000 + l * 7 + 1);
        shadow[m][l] = wdata;
      end
    @(negedge clk);
    we = 0;
    for (int m = 0; m < NM; m++)
      for (int l = 0; l < NL; l++) begin
        rmodel = MODEL_W'(m); rlayer = LAYER_W'(l);
        #1;
        checks++;
        if (rdata !== shadow[m][l]) failures++;
      end
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      we = 1'($urandom);
      wmodel = MODEL_W'($urandom); wlayer = LAYER_W'($urandom); wdata = 16'($urandom);
      rmodel = MODEL_W'($urandom); rlayer = LAYER_W'($urandom);
      #1;
      checks++;
      if (rdata !== shadow[rmodel][rlayer]) failures++;
      if (we) shadow[wmodel][wlayer] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
