// sketch_buffer: one network sketch with MEM_STAGES time-window generations.
//
// The sketch is an array of 2^HASH_W entries. Each entry holds, for every
// generation g (0 = current window, g = the window g ticks ago), the count,
// sum, minimum and maximum of the values recorded under its index. Storage
// is a register array, as the generation shift touches every entry at once.
//
// Per cycle the buffer does one read-modify-write of entry in_idx:
//   * shift high: every entry ages, generation g takes generation g-1 and
//     generation 0 becomes empty; the oldest generation is dropped. Any
//     request in the same cycle sees the aged state.
//   * in_valid and not in_is_read: in_val is added to generation 0 of the
//     entry (count saturates at its maximum; once saturated the sum stops
//     too, so sum/count stays the mean of the counted packets).
//   * in_valid and in_is_read: the entry is only read.
// One cycle later out_valid is high and out_entries holds the entry after
// the update, all generations, so back-to-back requests to the same index
// need no forwarding: the array is read and written in the same cycle.
//
// The source gives the array size (2^Hash Width entries) and that buffers
// keep memory stages covering different time periods; the entry contents,
// the shift-on-tick aging and the tie rule above are this design's choices.
module sketch_buffer
  import fe_pkg::*;
#(
  parameter int HASH_W     = 4,
  parameter int MEM_STAGES = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic              in_is_read,
  input  logic [HASH_W-1:0] in_idx,
  input  logic [VAL_W-1:0]  in_val,
  input  logic              shift,
  output logic              out_valid,
  output logic              out_is_read,
  output logic [HASH_W-1:0] out_idx,
  output entry_t            out_entries [MEM_STAGES]
);

  localparam int DEPTH = 1 << HASH_W;

  entry_t mem      [DEPTH][MEM_STAGES];
  entry_t aged     [DEPTH][MEM_STAGES];
  entry_t cur      [MEM_STAGES];
  entry_t upd      [MEM_STAGES];

  // Aging by one generation when shift is high.
  always_comb begin
    for (int e = 0; e < DEPTH; e++) begin
      for (int g = 0; g < MEM_STAGES; g++) begin
        if (!shift)      aged[e][g] = mem[e][g];
        else if (g == 0) aged[e][g] = ENTRY_EMPTY;
        else             aged[e][g] = mem[e][g-1];
      end
    end
  end

  // Record the value into generation 0 of the addressed entry.
  always_comb begin
    for (int g = 0; g < MEM_STAGES; g++) cur[g] = aged[in_idx][g];
    upd = cur;
    if (in_valid && !in_is_read && cur[0].count != '1) begin
      upd[0].count = cur[0].count + CNT_W'(1);
      upd[0].sum   = cur[0].sum + SUM_W'(in_val);
      upd[0].min   = (in_val < cur[0].min) ? in_val : cur[0].min;
      upd[0].max   = (in_val > cur[0].max) ? in_val : cur[0].max;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int e = 0; e < DEPTH; e++)
        for (int g = 0; g < MEM_STAGES; g++)
          mem[e][g] <= ENTRY_EMPTY;
      out_valid   <= 1'b0;
      out_is_read <= 1'b0;
      out_idx     <= '0;
      for (int g = 0; g < MEM_STAGES; g++) out_entries[g] <= ENTRY_EMPTY;
    end else begin
      for (int e = 0; e < DEPTH; e++)
        for (int g = 0; g < MEM_STAGES; g++)
          mem[e][g] <= (HASH_W'(e) == in_idx) ? upd[g] : aged[e][g];
      out_valid   <= in_valid;
      out_is_read <= in_is_read;
      out_idx     <= in_idx;
      out_entries <= upd;
    end
  end

endmodule
