// pipe_divider: fully pipelined unsigned divider, one quotient bit per stage.
//
// Computes quo = floor(num / den) for a 2*W-bit numerator and W-bit
// denominator under the precondition num < den * 2^W (the quotient fits in
// W bits), which holds for a sum of at most `count` W-bit values divided by
// that count. Restoring division: the partial remainder starts as the upper
// W bits of num; stage i shifts in numerator bit W-1-i, subtracts den when
// it fits and sets that quotient bit. W stages, one result per cycle, latency
// W cycles. A zero denominator yields quotient 0.
//
// Interface: in_valid/num/den in; out_valid/quo out after W cycles. Used by
// metric_unit for the average feature; the structure is this design's choice.
module pipe_divider #(
  parameter int W = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic [2*W-1:0] num,
  input  logic [W-1:0]   den,
  output logic           out_valid,
  output logic [W-1:0]   quo
);

  // Per-stage state: valid, partial remainder, remaining low numerator bits
  // (shifted up), divisor and quotient bits found so far.
  logic           v_q   [W];
  logic [W-1:0]   rem_q [W];
  logic [W-1:0]   low_q [W];
  logic [W-1:0]   den_q [W];
  logic [W-1:0]   quo_q [W];

  always_ff @(posedge clk) begin
    for (int s = 0; s < W; s++) begin
      logic [W-1:0] rem_i, low_i, den_i, quo_i;
      logic         v_i;
      logic [W:0]   trial;
      if (s == 0) begin
        v_i   = in_valid;
        rem_i = (den == '0) ? '0 : num[2*W-1:W];
        low_i = (den == '0) ? '0 : num[W-1:0];
        den_i = (den == '0) ? W'(1) : den;
        quo_i = '0;
      end else begin
        v_i   = v_q[s-1];
        rem_i = rem_q[s-1];
        low_i = low_q[s-1];
        den_i = den_q[s-1];
        quo_i = quo_q[s-1];
      end
      trial = {rem_i, low_i[W-1]};
      if (trial >= {1'b0, den_i}) begin
        trial = trial - {1'b0, den_i};
        quo_i = {quo_i[W-2:0], 1'b1};
      end else begin
        quo_i = {quo_i[W-2:0], 1'b0};
      end
      v_q[s]   <= rst_n ? v_i : 1'b0;
      rem_q[s] <= trial[W-1:0];
      low_q[s] <= {low_i[W-2:0], 1'b0};
      den_q[s] <= den_i;
      quo_q[s] <= quo_i;
    end
  end

  assign out_valid = v_q[W-1];
  assign quo       = quo_q[W-1];

endmodule
