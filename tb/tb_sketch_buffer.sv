// tb_sketch_buffer: random updates, reads and window ticks against the
// reference sketch model. Every response (one cycle after the request) is
// compared field by field: count, sum, min, max of every generation. Also
// checks that a request with in_valid low produces no response, and drives a
// hot index long enough to saturate its count.
module tb_sketch_buffer;
  import fe_pkg::*;
  import fe_ref_pkg::*;

  localparam int HW = 4;
  localparam int MS = 3;

  logic          clk = 0, rst_n = 0;
  logic          in_valid = 0, in_is_read = 0, shift = 0;
  logic [HW-1:0] in_idx = '0;
  logic [15:0]   in_val = '0;
  logic          out_valid, out_is_read;
  logic [HW-1:0] out_idx;
  entry_t        out_entries [MS];

  int checks = 0, failures = 0;
  int n_shift = 0, n_read = 0, n_sat = 0;

  sketch_buffer #(.HASH_W(HW), .MEM_STAGES(MS)) dut (.*);

  always #5 clk = ~clk;

  SketchModel m;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Drive one request (on the negedge) and check the response one cycle on.
  task automatic step(bit v, bit rd, int idx, int val, bit sh);
    in_valid = v; in_is_read = rd; in_idx = HW'(idx); in_val = 16'(val); shift = sh;
    if (sh) begin m.age(); n_shift++; end
    if (v && !rd) m.record(idx, val);
    if (v && rd) n_read++;
    @(negedge clk);
    checks++;
    if (out_valid !== v) begin
      failures++; $display("FAIL out_valid=%0b exp=%0b", out_valid, v);
    end
    if (v) begin
      checks++;
      if (out_idx !== HW'(idx) || out_is_read !== rd) begin
        failures++; $display("FAIL idx/read %0d/%0b exp %0d/%0b", out_idx, out_is_read, idx, rd);
      end
      for (int g = 0; g < MS; g++) begin
        checks++;
        if (out_entries[g].count != 16'(m.cnt[idx][g]) || out_entries[g].sum != 32'(m.sum[idx][g])
            || out_entries[g].min != 16'(m.mn[idx][g]) || out_entries[g].max != 16'(m.mx[idx][g])) begin
          failures++;
          $display("FAIL idx=%0d g=%0d got c=%0d s=%0d mn=%0d mx=%0d exp c=%0d s=%0d mn=%0d mx=%0d",
                   idx, g, out_entries[g].count, out_entries[g].sum, out_entries[g].min,
                   out_entries[g].max, m.cnt[idx][g], m.sum[idx][g], m.mn[idx][g], m.mx[idx][g]);
        end
      end
    end
  endtask

  initial begin
    m = new(HW, MS);
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    // Random traffic with occasional ticks and reads.
    for (int i = 0; i < 3000; i++) begin
      bit v, rd, sh;
      v  = ($urandom % 8) != 0;
      rd = ($urandom % 5) == 0;
      sh = ($urandom % 97) == 0;
      step(v, rd, $urandom % 16, $urandom % 1600, sh);
    end
    // Read every entry of every generation.
    for (int e = 0; e < 16; e++) step(1, 1, e, 0, 0);
    // Saturate one entry's count.
    for (int i = 0; i < 65540; i++) step(1, 0, 5, 100 + (i % 3), 0);
    if (m.cnt[5][0] == CNT_MAX) n_sat++;
    step(1, 1, 5, 0, 0);
    // Age everything out: MS ticks leave only empty generations.
    for (int i = 0; i < MS; i++) step(0, 0, 0, 0, 1);
    for (int e = 0; e < 16; e++) step(1, 1, e, 0, 0);
    checks++;
    if (n_shift == 0 || n_read == 0 || n_sat == 0) begin
      failures++; $display("FAIL coverage shift=%0d read=%0d sat=%0d", n_shift, n_read, n_sat);
    end
    $display("coverage: shifts=%0d reads=%0d saturations=%0d", n_shift, n_read, n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
