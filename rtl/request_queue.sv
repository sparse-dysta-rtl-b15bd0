// request_queue: per-request storage of the dynamic scheduler (ReqstQ).
//
// The design keeps per-request information (tags, scores, latency SLOs and
// so on) in a set of queues of configurable depth; this module holds them as
// DEPTH slots of q_entry_t, one field per queue, with a valid bit per slot.
// Because the scheduler may dispatch and retire any request, not only the
// oldest, slots are addressed by index rather than strictly first in, first
// out; a new request takes the lowest free slot. That slot organisation is a
// choice of this implementation.
//
// Ports (all writes take effect at the clock edge, reads are combinational):
//   push_en/push_entry  store a new request in slot free_idx (needs !full)
//   upd_en/upd_idx/upd_entry   overwrite a whole entry (valid unchanged)
//   score_we/score_idx/score   overwrite only the score field
//   pop_en/pop_idx      free a slot
//   rd_idx -> rd_entry, rd_valid;  valid (per slot), count, full, free_idx
// At most one of push, upd and pop may be active per clock; a score write
// may coincide only with none of them (checked by an assertion).
module request_queue
  import dysta_pkg::*;
#(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned IDX_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               push_en,
  input  q_entry_t           push_entry,
  input  logic               upd_en,
  input  logic [IDX_W-1:0]   upd_idx,
  input  q_entry_t           upd_entry,
  input  logic               score_we,
  input  logic [IDX_W-1:0]   score_idx,
  input  fp16_t              score,
  input  logic               pop_en,
  input  logic [IDX_W-1:0]   pop_idx,
  input  logic [IDX_W-1:0]   rd_idx,
  output q_entry_t           rd_entry,
  output logic               rd_valid,
  output logic [DEPTH-1:0]   valid,
  output logic [IDX_W:0]     count,
  output logic               full,
  output logic [IDX_W-1:0]   free_idx
);

  q_entry_t slots [DEPTH];

  always_comb begin
    free_idx = '0;
    for (int k = DEPTH - 1; k >= 0; k--)
      if (!valid[k]) free_idx = IDX_W'(k);
  end

  assign full     = &valid;
  assign rd_entry = slots[rd_idx];
  assign rd_valid = valid[rd_idx];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid <= '0;
      count <= '0;
    end else begin
      if (push_en && !full) begin
        valid[free_idx] <= 1'b1;
        count           <= count + 1'b1;
      end else if (pop_en && valid[pop_idx]) begin
        valid[pop_idx] <= 1'b0;
        count          <= count - 1'b1;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (push_en && !full)   slots[free_idx]       <= push_entry;
    else if (upd_en)        slots[upd_idx]        <= upd_entry;
    else if (score_we)      slots[score_idx].score <= score;
  end

  a_one_write: assert property (@(posedge clk) disable iff (!rst_n)
    $onehot0({push_en, upd_en, pop_en, score_we}));
  a_no_push_full: assert property (@(posedge clk) disable iff (!rst_n) push_en |-> !full);

endmodule
