// npu_model: behavioural stand-in for the NPU, for testbenches only.
//
// On start it runs one layer of the given request: it streams `beats`
// activation beats of LANES values, with a zero probability that depends on
// the request's tag and the layer (so different requests show different
// dynamic sparsity), then pulses layer_done, with layer_last on the model's
// final layer (model m has 3 + m % 4 layers). zeros_out holds the number of
// zeros of the layer just finished. A start while busy is an error.
module npu_model #(
  parameter int LANES  = 8,
  parameter int DATA_W = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         start,
  input  logic [7:0]                   tag,
  input  logic [3:0]                   model,
  input  logic [5:0]                   layer,
  output logic                         act_valid,
  output logic [LANES-1:0][DATA_W-1:0] act_data,
  output logic                         layer_done,
  output logic                         layer_last,
  output int                           zeros_out,
  output int                           start_errors
);

  function automatic int num_layers(int m);
    return 3 + m % 4;
  endfunction

  initial begin
    act_valid = 0; act_data = '0; layer_done = 0; layer_last = 0;
    zeros_out = 0; start_errors = 0;
    forever begin
      @(negedge clk);
      if (rst_n && start) begin
        int beats, pz, z;
        int m, l, tg;
        m = int'(model); l = int'(layer); tg = int'(tag);
        @(posedge clk);
        beats = 20 + (tg * 7 + l * 13) % 40;
        pz = (tg * 37 + l * 11) % 90;
        z = 0;
        for (int b = 0; b < beats; b++) begin
          @(negedge clk);
          act_valid = 1;
          for (int k = 0; k < LANES; k++) begin
            if ($urandom_range(99) < pz) begin
              act_data[k] = '0;
              z++;
            end else act_data[k] = DATA_W'($urandom_range(2 ** DATA_W - 1, 1));
          end
        end
        @(negedge clk);
        act_valid  = 0;
        zeros_out  = z;
        layer_done = 1;
        layer_last = (l >= num_layers(m) - 1);
        @(negedge clk);
        layer_done = 0;
        layer_last = 0;
      end
    end
  end

  always @(negedge clk) if (start && (act_valid || layer_done)) start_errors <= start_errors + 1;

endmodule
