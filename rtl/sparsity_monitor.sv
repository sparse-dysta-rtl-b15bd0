// sparsity_monitor: runtime monitor that measures the sparsity of the layer
// the NPU is executing, by counting zero-valued activations.
//
// Every cycle with act_valid, the LANES activations of act_data are compared
// with zero and the number of zeros is added to a running count. When the
// NPU signals the end of a layer (layer_done, together with layer_last when
// the layer is the request's final one), the count, including any beat in
// that same cycle, is frozen, converted to FP16 as count * 2^-ZERO_SCALE and
// offered to the controller with res_valid; it is held until res_ready. The
// count then restarts from zero. The scaling keeps counts of up to
// 65504 * 2^ZERO_SCALE inside the FP16 range; the shape lookup table stores
// 2^ZERO_SCALE / shape so that the product is the sparsity ratio.
//
// That the monitor counts zeros follows the design description; the lane
// count, activation width, scaling and handshake are this design's choices.
// Timing: res_valid rises the clock after layer_done.
module sparsity_monitor
  import dysta_pkg::*;
#(
  parameter int unsigned LANES      = 8,
  parameter int unsigned DATA_W     = 8,
  parameter int unsigned ZERO_SCALE = 10
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         act_valid,
  input  logic [LANES-1:0][DATA_W-1:0] act_data,
  input  logic                         layer_done,
  input  logic                         layer_last,
  output logic                         res_valid,
  output fp16_t                        res_zeros,
  output logic [31:0]                  res_count,
  output logic                         res_last,
  input  logic                         res_ready
);

  logic [31:0]            count;
  logic [$clog2(LANES+1)-1:0] beat_zeros;

  always_comb begin
    beat_zeros = '0;
    for (int k = 0; k < LANES; k++)
      if (act_data[k] == '0) beat_zeros = beat_zeros + 1'b1;
  end

  logic [31:0] total;
  assign total = count + (act_valid ? 32'(beat_zeros) : 32'd0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      res_valid <= 1'b0;
      res_zeros <= FP16_ZERO;
      res_count <= '0;
      res_last  <= 1'b0;
    end else begin
      if (res_valid && res_ready) res_valid <= 1'b0;
      if (layer_done) begin
        count     <= '0;
        res_valid <= 1'b1;
        res_count <= total;
        res_zeros <= uint_to_fp16(total, ZERO_SCALE);
        res_last  <= layer_last;
      end else begin
        count <= total;
      end
    end
  end

  // A new layer may only end once the previous result has been taken.
  property p_no_overrun;
    @(posedge clk) disable iff (!rst_n) layer_done |-> (!res_valid || res_ready);
  endproperty
  a_no_overrun: assert property (p_no_overrun);

  property p_hold;
    @(posedge clk) disable iff (!rst_n) (res_valid && !res_ready) |=> (res_valid && $stable(res_count));
  endproperty
  a_hold: assert property (p_hold);

endmodule
