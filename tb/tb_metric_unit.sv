// tb_metric_unit: streams random entries (one per cycle, with gaps) into
// metric_unit and checks each result against floor(sum/count), min, max and
// count computed in the testbench, including empty generations (all zero)
// and extreme values. Checks the latency of exactly METRIC_LAT cycles.
module tb_metric_unit;
  import fe_pkg::*;

  localparam int MS = 3;
  localparam int TW = 8;

  logic          clk = 0, rst_n = 0;
  logic          in_valid = 0;
  logic [TW-1:0] in_tag = '0;
  entry_t        in_entries [MS];
  logic          out_valid;
  logic [TW-1:0] out_tag;
  feat_t         out_feats [MS];

  int checks = 0, failures = 0;

  metric_unit #(.MEM_STAGES(MS), .TAG_W(TW)) dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int     cycle;
    int     tag;
    feat_t  f [MS];
  } exp_t;
  exp_t q[$];
  int cycle = 0;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic entry_t rand_entry(int mode);
    entry_t e;
    longint c, s, mn, mx;
    case (mode)
      0: c = 0;
      1: c = 65535;
      default: c = 1 + ($urandom % 300);
    endcase
    mn = $urandom % 65536;
    mx = mn + ($urandom % (65536 - mn));
    if (mode == 3) begin mn = 65535; mx = 65535; end
    // A sum consistent with count values between mn and mx.
    s = (c == 0) ? 0 : mn * c + (longint'($urandom) % ((mx - mn) * c + 1));
    e.count = 16'(c); e.sum = 32'(s); e.min = (c == 0) ? 16'hffff : 16'(mn);
    e.max = (c == 0) ? 16'h0 : 16'(mx);
    return e;
  endfunction

  initial begin
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      // Drive.
      in_valid = ($urandom % 4) != 0;
      in_tag   = TW'($urandom);
      for (int g = 0; g < MS; g++) in_entries[g] = rand_entry($urandom % 6);
      if (in_valid) begin
        exp_t x;
        x.cycle = cycle + METRIC_LAT;
        x.tag = int'(in_tag);
        for (int g = 0; g < MS; g++) begin
          longint c;
          c = longint'(in_entries[g].count);
          x.f[g].count = in_entries[g].count;
          x.f[g].avg = (c == 0) ? '0 : 16'(longint'(in_entries[g].sum) / c);
          x.f[g].min = (c == 0) ? '0 : in_entries[g].min;
          x.f[g].max = (c == 0) ? '0 : in_entries[g].max;
        end
        q.push_back(x);
      end
      @(negedge clk);
      cycle++;
      // Check.
      if (out_valid) begin
        checks++;
        if (q.size() == 0) begin
          failures++; $display("FAIL unexpected output");
        end else begin
          exp_t x;
          x = q.pop_front();
          if (x.cycle != cycle || int'(out_tag) != x.tag) begin
            failures++; $display("FAIL latency/tag cycle=%0d exp=%0d", cycle, x.cycle);
          end
          for (int g = 0; g < MS; g++) begin
            checks++;
            if (out_feats[g] != x.f[g]) begin
              failures++;
              $display("FAIL g=%0d got %p exp %p", g, out_feats[g], x.f[g]);
            end
          end
        end
      end
    end
    in_valid = 0;
    repeat (METRIC_LAT + 2) begin
      @(negedge clk); cycle++;
      if (out_valid) begin
        exp_t x;
        x = q.pop_front();
        checks++;
        if (x.cycle != cycle) failures++;
        for (int g = 0; g < MS; g++) begin
          checks++;
          if (out_feats[g] != x.f[g]) failures++;
        end
      end
    end
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
