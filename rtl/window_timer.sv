// window_timer: time-window tick generator for the sketch generations.
//
// A cycle counter runs from 0 to period-1 and then wraps; in the wrap cycle
// tick is high for exactly one cycle, so with a constant period the tick
// repeats every `period` cycles, the first one `period` cycles after reset.
// A period of 0 stops the counter and suppresses ticks. Changing the period
// takes effect at once: if the counter already lies at or beyond the new
// end, the next cycle ticks. The source only says that the sketch keeps
// generations covering successive time periods; how a window is timed is
// this design's choice.
//
// Interface: clk, rst_n (synchronous, active low), period in, tick out
// (registered).
module window_timer #(
  parameter int CNT_W = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [CNT_W-1:0] period,
  output logic             tick
);

  logic [CNT_W-1:0] cnt;
  logic             last;

  assign last = (cnt + CNT_W'(1) >= period);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (period == '0) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (last) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + CNT_W'(1);
      tick <= 1'b0;
    end
  end

endmodule
