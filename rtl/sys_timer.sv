// sys_timer: the scheduler's time base (Sys_Clk).
//
// Counts clock cycles and advances a tick counter every tick_div cycles
// (tick_div = 0 or 1 means every cycle). The tick count is presented as an
// FP16 number, the form in which the compute unit uses the current time.
// FP16 holds whole ticks exactly only up to 2048 and saturates to infinity
// above 65504, so the host chooses the tick length to suit the deadlines of
// its workload. The tick-based time base is this design's own choice.
module sys_timer
  import dysta_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] tick_div,
  output logic [31:0] ticks,
  output fp16_t       now
);

  logic [31:0] div_cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      div_cnt <= '0;
      ticks   <= '0;
    end else if (div_cnt + 32'd1 >= tick_div) begin
      div_cnt <= '0;
      ticks   <= ticks + 32'd1;
    end else begin
      div_cnt <= div_cnt + 32'd1;
    end
  end

  assign now = uint_to_fp16(ticks, 0);

endmodule
