// fe_pkg: shared types and constants of the network-sketch feature extractor.
//
// The extractor receives one packet header per clock cycle and keeps, per
// sketch lane, an array of 2^HASH_W entries. Each entry stores, for each of
// MEM_STAGES time-window generations, the count, sum, minimum and maximum of
// one header value. This package fixes the widths of those fields, the header
// size (50 bytes per cycle, the figure the throughput claim rests on) and the
// field layout each of the four lanes uses. Field widths, the header layout
// and the choice of fields per lane are this design's own choices.
package fe_pkg;

  // Header bytes per clock cycle (430 MHz x 50 B = 21 GB/s in the source).
  localparam int HDR_BYTES = 50;
  localparam int HDR_W     = 8 * HDR_BYTES;

  // Number of sketch lanes (hash + buffer + metrics columns).
  localparam int N_LANES = 4;

  // Entry field widths.
  localparam int VAL_W = 16;             // aggregated header value
  localparam int CNT_W = 16;             // packets per window, saturating
  localparam int SUM_W = VAL_W + CNT_W;  // cannot overflow while count saturates
  localparam int KEY_W = 32;             // widest key (IPv4 address)

  // Pipeline latencies in cycles.
  localparam int METRIC_LAT = VAL_W;            // one quotient bit per stage
  localparam int LANE_LAT   = 2 + METRIC_LAT;   // hash reg + buffer + metrics

  // One sketch entry for one generation.
  typedef struct packed {
    logic [CNT_W-1:0] count;
    logic [SUM_W-1:0] sum;
    logic [VAL_W-1:0] min;
    logic [VAL_W-1:0] max;
  } entry_t;

  localparam entry_t ENTRY_EMPTY = '{count: '0, sum: '0, min: '1, max: '0};

  // Features of one entry for one generation (f1 = avg, f2 = min, f3 = max).
  typedef struct packed {
    logic [CNT_W-1:0] count;
    logic [VAL_W-1:0] avg;
    logic [VAL_W-1:0] min;
    logic [VAL_W-1:0] max;
  } feat_t;

  // Header layout (byte 0 is the first byte on the wire and sits in
  // bits [7:0]; multi-byte fields are big-endian, as on the wire):
  //   bytes  0..13  Ethernet II header
  //   bytes 14..33  IPv4 header (no options)
  //   bytes 34..49  first 16 bytes of the TCP/UDP header
  localparam int OFF_IP_LEN   = 16;  // IPv4 total length
  localparam int OFF_IP_SRC   = 26;  // IPv4 source address
  localparam int OFF_IP_DST   = 30;  // IPv4 destination address
  localparam int OFF_SRC_PORT = 34;  // TCP/UDP source port
  localparam int OFF_DST_PORT = 36;  // TCP/UDP destination port

  // Per-lane key field (offset, bytes); every lane aggregates IPv4 length.
  localparam int LANE_KEY_OFF   [N_LANES] = '{OFF_IP_SRC, OFF_IP_DST, OFF_SRC_PORT, OFF_DST_PORT};
  localparam int LANE_KEY_BYTES [N_LANES] = '{4, 4, 2, 2};
  localparam int LANE_VAL_OFF   [N_LANES] = '{OFF_IP_LEN, OFF_IP_LEN, OFF_IP_LEN, OFF_IP_LEN};

endpackage
