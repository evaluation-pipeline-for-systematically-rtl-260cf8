// feature_extractor: real-time network-sketch feature extraction unit.
//
// One 50-byte packet header (Ethernet + IPv4 + first 16 bytes of TCP/UDP)
// enters per clock cycle and is broadcast to N_LANES = 4 sketch lanes. Each
// lane hashes its own key field (IPv4 source, IPv4 destination, source
// port, destination port) into a 2^HASH_W-entry sketch and records the IPv4
// total length there, in the current of MEM_STAGES time-window generations.
// LANE_LAT = 18 cycles after the header, the features of every touched entry
// leave together: per lane and generation the packet count, average (f1),
// minimum (f2) and maximum (f3) length. A window_timer ages the generations
// every cfg_window_cycles cycles (0 disables aging).
//
// Headers are never stalled. A read request (rd_valid, rd_index) dumps entry
// rd_index of every lane through the same pipeline; it is accepted
// (rd_ready high) only in a cycle without a header and must be held until
// then. Its answer carries feat_is_read = 1.
//
// Parameters HASH_W = 4 and MEM_STAGES = 3 are the configuration of the
// source's 430 MHz result; the four lanes follow its block diagram. The
// header layout, lane fields, window timing and read port are this design's
// choices.
module feature_extractor
  import fe_pkg::*;
#(
  parameter int HASH_W     = 4,
  parameter int MEM_STAGES = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [31:0]       cfg_window_cycles,
  input  logic              hdr_valid,
  input  logic [HDR_W-1:0]  hdr_data,
  input  logic              rd_valid,
  input  logic [HASH_W-1:0] rd_index,
  output logic              rd_ready,
  output logic              window_tick,
  output logic              feat_valid,
  output logic              feat_is_read,
  output logic [HASH_W-1:0] feat_idx [N_LANES],
  output feat_t             feat     [N_LANES][MEM_STAGES]
);

  window_timer #(.CNT_W(32)) u_timer (
    .clk    (clk),
    .rst_n  (rst_n),
    .period (cfg_window_cycles),
    .tick   (window_tick)
  );

  assign rd_ready = !hdr_valid;

  logic lane_valid   [N_LANES];
  logic lane_is_read [N_LANES];

  for (genvar l = 0; l < N_LANES; l++) begin : g_lane
    sketch_lane #(
      .HASH_W     (HASH_W),
      .MEM_STAGES (MEM_STAGES),
      .KEY_OFF    (LANE_KEY_OFF[l]),
      .KEY_BYTES  (LANE_KEY_BYTES[l]),
      .VAL_OFF    (LANE_VAL_OFF[l])
    ) u_lane (
      .clk         (clk),
      .rst_n       (rst_n),
      .in_valid    (hdr_valid || rd_valid),
      .in_is_read  (!hdr_valid),
      .in_rd_idx   (rd_index),
      .in_hdr      (hdr_data),
      .shift       (window_tick),
      .out_valid   (lane_valid[l]),
      .out_is_read (lane_is_read[l]),
      .out_idx     (feat_idx[l]),
      .out_feats   (feat[l])
    );
  end

  assign feat_valid   = lane_valid[0];
  assign feat_is_read = lane_is_read[0];

  // A read request that is not yet accepted must stay asserted.
  a_rd_hold : assert property (@(posedge clk) disable iff (!rst_n)
                               rd_valid && !rd_ready |=> rd_valid)
    else $error("rd_valid dropped before it was accepted");

  // All lanes run in lock step.
  for (genvar l = 1; l < N_LANES; l++) begin : g_chk
    a_lockstep : assert property (@(posedge clk) disable iff (!rst_n)
                                  lane_valid[l] == lane_valid[0]
                                  && (!lane_valid[0] || lane_is_read[l] == lane_is_read[0]));
  end

endmodule
