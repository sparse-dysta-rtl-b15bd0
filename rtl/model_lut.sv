// model_lut: one of the scheduler's three model-information lookup tables
// (latency, sparsity, shape), indexed by model-pattern pair and layer.
//
// The design caches latency, sparsity and shape information per model-pattern
// pair in three LUTs; this module is one such table, instantiated three
// times. Each holds NUM_MODELS x MAX_LAYERS FP16 words. The host writes it
// through a synchronous write port (we, wmodel, wlayer, wdata); the
// controller reads it combinationally (rmodel, rlayer -> rdata). Indexing by
// layer, the table sizes and the port timing are this design's choices. The
// memory is not reset: the host must write every entry the scheduler will
// read.
module model_lut
  import dysta_pkg::*;
#(
  parameter int unsigned NUM_MODELS = 16,
  parameter int unsigned MAX_LAYERS = 64
) (
  input  logic               clk,
  input  logic               we,
  input  logic [MODEL_W-1:0] wmodel,
  input  logic [LAYER_W-1:0] wlayer,
  input  fp16_t              wdata,
  input  logic [MODEL_W-1:0] rmodel,
  input  logic [LAYER_W-1:0] rlayer,
  output fp16_t              rdata
);

  localparam int unsigned ENTRIES = NUM_MODELS * MAX_LAYERS;

  fp16_t mem [ENTRIES];

  function automatic int unsigned addr(logic [MODEL_W-1:0] m, logic [LAYER_W-1:0] l);
    return (int'(m) % NUM_MODELS) * MAX_LAYERS + (int'(l) % MAX_LAYERS);
  endfunction

  always_ff @(posedge clk) begin
    if (we) mem[addr(wmodel, wlayer)] <= wdata;
  end

  assign rdata = mem[addr(rmodel, rlayer)];

endmodule
