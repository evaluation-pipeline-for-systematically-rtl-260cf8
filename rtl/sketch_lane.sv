// sketch_lane: one feature-extraction column (hash, buffer, f1/f2/f3).
//
// Each cycle the lane may take one 50-byte header or one read request.
// Cycle 0: the key field (KEY_BYTES bytes at byte KEY_OFF, big-endian) and
// the 16-bit value field (at byte VAL_OFF) are cut from the header and the key
// is hashed with shift_hash; index, value and request type are registered.
// Cycle 1: sketch_buffer records the value (or, for a read, just reads entry
// in_rd_idx) and presents the entry. Cycles 2..17: metric_unit computes the
// features. out_valid rises LANE_LAT = 18 cycles after in_valid; one request
// per cycle is sustained. shift (the window tick) acts on the buffer in the
// cycle it is high, i.e. on the request that entered one cycle earlier.
//
// The hash -> buffer -> f1 f2 f3 chain and the 2^HASH_W-entry array follow
// the source; field choice, header layout and pipelining are this design's.
module sketch_lane
  import fe_pkg::*;
#(
  parameter int HASH_W     = 4,
  parameter int MEM_STAGES = 3,
  parameter int KEY_OFF    = OFF_IP_SRC,
  parameter int KEY_BYTES  = 4,
  parameter int VAL_OFF    = OFF_IP_LEN
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_is_read,
  input  logic [HASH_W-1:0] in_rd_idx,
  input  logic [HDR_W-1:0]  in_hdr,
  input  logic              shift,
  output logic              out_valid,
  output logic              out_is_read,
  output logic [HASH_W-1:0] out_idx,
  output feat_t             out_feats [MEM_STAGES]
);

  // Field extraction (network byte order).
  logic [KEY_W-1:0]  key;
  logic [VAL_W-1:0]  val;
  logic [HASH_W-1:0] hidx;

  always_comb begin
    key = '0;
    for (int b = 0; b < KEY_BYTES; b++)
      key = {key[KEY_W-9:0], in_hdr[8*(KEY_OFF+b) +: 8]};
    val = {in_hdr[8*VAL_OFF +: 8], in_hdr[8*(VAL_OFF+1) +: 8]};
  end

  shift_hash #(.KEY_W(KEY_W), .HASH_W(HASH_W)) u_hash (
    .key (key),
    .idx (hidx)
  );

  // Register between hash and buffer.
  logic              h_valid, h_is_read;
  logic [HASH_W-1:0] h_idx;
  logic [VAL_W-1:0]  h_val;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      h_valid   <= 1'b0;
      h_is_read <= 1'b0;
      h_idx     <= '0;
      h_val     <= '0;
    end else begin
      h_valid   <= in_valid;
      h_is_read <= in_is_read;
      h_idx     <= in_is_read ? in_rd_idx : hidx;
      h_val     <= val;
    end
  end

  logic              b_valid, b_is_read;
  logic [HASH_W-1:0] b_idx;
  entry_t            b_entries [MEM_STAGES];

  sketch_buffer #(.HASH_W(HASH_W), .MEM_STAGES(MEM_STAGES)) u_buf (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_valid    (h_valid),
    .in_is_read  (h_is_read),
    .in_idx      (h_idx),
    .in_val      (h_val),
    .shift       (shift),
    .out_valid   (b_valid),
    .out_is_read (b_is_read),
    .out_idx     (b_idx),
    .out_entries (b_entries)
  );

  logic [HASH_W:0] m_tag;

  metric_unit #(.MEM_STAGES(MEM_STAGES), .TAG_W(HASH_W + 1)) u_met (
    .clk        (clk),
    .rst_n      (rst_n),
    .in_valid   (b_valid),
    .in_tag     ({b_is_read, b_idx}),
    .in_entries (b_entries),
    .out_valid  (out_valid),
    .out_tag    (m_tag),
    .out_feats  (out_feats)
  );

  assign out_is_read = m_tag[HASH_W];
  assign out_idx     = m_tag[HASH_W-1:0];

endmodule
