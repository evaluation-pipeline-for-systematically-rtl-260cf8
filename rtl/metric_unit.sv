// metric_unit: features f1 (average), f2 (minimum), f3 (maximum) of an entry.
//
// For every generation of a sketch entry it computes the average as
// floor(sum / count) in a pipelined divider (pipe_divider, METRIC_LAT = VAL_W
// cycles) and delays count, minimum and maximum by the same number of cycles
// so all four leave together. One entry is accepted per cycle. A generation
// with count 0 reports zeros for all features. in_tag is carried along
// unchanged so callers can attach index and request type.
//
// The source names average, minimum and maximum as the metrics computed from
// each buffer and draws them as f1, f2, f3; the divider, the count output and
// the zero convention for empty generations are this design's choices.
//
// Interface: in_valid/in_tag/in_entries in; out_valid/out_tag/out_feats out,
// METRIC_LAT cycles later.
module metric_unit
  import fe_pkg::*;
#(
  parameter int MEM_STAGES = 3,
  parameter int TAG_W      = 5
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [TAG_W-1:0] in_tag,
  input  entry_t           in_entries [MEM_STAGES],
  output logic             out_valid,
  output logic [TAG_W-1:0] out_tag,
  output feat_t            out_feats  [MEM_STAGES]
);

  // Delay line for everything that is not divided.
  typedef struct packed {
    logic             valid;
    logic [TAG_W-1:0] tag;
  } side_t;

  side_t            side_q [METRIC_LAT];
  feat_t            pass_q [METRIC_LAT][MEM_STAGES];
  logic [VAL_W-1:0] avg    [MEM_STAGES];
  logic             div_valid [MEM_STAGES];

  for (genvar g = 0; g < MEM_STAGES; g++) begin : g_div
    pipe_divider #(.W(VAL_W)) u_div (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .num       (in_entries[g].sum),
      .den       (in_entries[g].count),
      .out_valid (div_valid[g]),
      .quo       (avg[g])
    );
  end

  always_ff @(posedge clk) begin
    for (int s = 0; s < METRIC_LAT; s++) begin
      if (s == 0) begin
        side_q[0].valid <= rst_n && in_valid;
        side_q[0].tag   <= in_tag;
        for (int g = 0; g < MEM_STAGES; g++) begin
          pass_q[0][g].count <= in_entries[g].count;
          pass_q[0][g].avg   <= '0;
          pass_q[0][g].min   <= (in_entries[g].count == '0) ? '0 : in_entries[g].min;
          pass_q[0][g].max   <= (in_entries[g].count == '0) ? '0 : in_entries[g].max;
        end
      end else begin
        side_q[s].valid <= rst_n && side_q[s-1].valid;
        side_q[s].tag   <= side_q[s-1].tag;
        pass_q[s]       <= pass_q[s-1];
      end
    end
  end

  assign out_valid = side_q[METRIC_LAT-1].valid;

  // The dividers and the delay line have the same latency.
  for (genvar g = 0; g < MEM_STAGES; g++) begin : g_chk
    a_div_aligned : assert property (@(posedge clk) disable iff (!rst_n)
                                     div_valid[g] == out_valid);
  end
  assign out_tag   = side_q[METRIC_LAT-1].tag;

  always_comb begin
    for (int g = 0; g < MEM_STAGES; g++) begin
      out_feats[g]     = pass_q[METRIC_LAT-1][g];
      out_feats[g].avg = avg[g];
    end
  end

endmodule
