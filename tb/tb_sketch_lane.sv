// tb_sketch_lane: one lane at its default fields (key = IPv4 source address,
// value = IPv4 total length). Random headers from a small address pool (so
// entries are hit repeatedly and different keys collide), read requests and
// window ticks are driven back to back; every feature vector is compared with
// the reference model and must arrive exactly LANE_LAT cycles after its
// request.
module tb_sketch_lane;
  import fe_pkg::*;
  import fe_ref_pkg::*;

  localparam int HW = 4;
  localparam int MS = 3;

  logic          clk = 0, rst_n = 0;
  logic          in_valid = 0, in_is_read = 0, shift = 0;
  logic [HW-1:0] in_rd_idx = '0;
  logic [HDR_W-1:0] in_hdr = '0;
  logic          out_valid, out_is_read;
  logic [HW-1:0] out_idx;
  feat_t         out_feats [MS];

  int checks = 0, failures = 0;
  int n_tick = 0, n_read = 0, n_hdr = 0;

  sketch_lane #(.HASH_W(HW), .MEM_STAGES(MS)) dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int        cycle;
    bit        is_read;
    int        idx;
    ref_feat_t f [MS];
  } exp_t;
  exp_t q[$];

  SketchModel m;
  int cycle = 0;
  bit p_valid = 0, p_read = 0;
  int p_idx = 0, p_val = 0;

  function automatic logic [HDR_W-1:0] make_hdr(logic [31:0] src, logic [15:0] len);
    logic [HDR_W-1:0] h;
    for (int b = 0; b < HDR_BYTES; b++) h[8*b +: 8] = 8'($urandom);
    for (int b = 0; b < 4; b++) h[8*(OFF_IP_SRC+b) +: 8] = src[8*(3-b) +: 8];
    h[8*OFF_IP_LEN +: 8]     = len[15:8];
    h[8*(OFF_IP_LEN+1) +: 8] = len[7:0];
    return h;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] pool [8];

  initial begin
    m = new(HW, MS);
    for (int i = 0; i < 8; i++) pool[i] = $urandom;
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 6000 + LANE_LAT; i++) begin
      bit v, rd, sh;
      logic [31:0] src;
      logic [15:0] len;
      // Drive request i (none in the drain phase) and this cycle's tick.
      v   = (i < 6000) && (($urandom % 6) != 0);
      rd  = ($urandom % 7) == 0;
      sh  = ($urandom % 150) == 0;
      src = pool[$urandom % 8];
      len = 16'(40 + ($urandom % 1461));
      in_valid = v; in_is_read = rd; in_rd_idx = HW'($urandom);
      in_hdr = make_hdr(src, len); shift = sh;
      // The tick acts together with the previous request in the buffer.
      if (sh) begin m.age(); n_tick++; end
      if (p_valid) begin
        exp_t x;
        x.cycle = cycle - 1 + LANE_LAT;
        x.is_read = p_read;
        x.idx = p_idx;
        if (!p_read) m.record(p_idx, p_val);
        for (int g = 0; g < MS; g++) x.f[g] = m.feat(p_idx, g);
        q.push_back(x);
      end
      p_valid = v; p_read = rd;
      p_idx = rd ? int'(in_rd_idx) : ref_hash(longint'(src), 32, HW);
      p_val = int'(len);
      if (v && rd) n_read++;
      if (v && !rd) n_hdr++;
      @(negedge clk);
      cycle++;
      if (out_valid) begin
        checks++;
        if (q.size() == 0) begin
          failures++; $display("FAIL unexpected output at %0d", cycle);
        end else begin
          exp_t x;
          x = q.pop_front();
          if (x.cycle != cycle || x.is_read != out_is_read || x.idx != int'(out_idx)) begin
            failures++;
            $display("FAIL cycle %0d exp %0d read %0b/%0b idx %0d/%0d", cycle, x.cycle,
                     out_is_read, x.is_read, out_idx, x.idx);
          end
          for (int g = 0; g < MS; g++) begin
            checks++;
            if (longint'(out_feats[g].count) != x.f[g].count || longint'(out_feats[g].avg) != x.f[g].avg
                || longint'(out_feats[g].min) != x.f[g].min || longint'(out_feats[g].max) != x.f[g].max) begin
              failures++;
              $display("FAIL idx %0d g %0d got %0d/%0d/%0d/%0d exp %0d/%0d/%0d/%0d", x.idx, g,
                       out_feats[g].count, out_feats[g].avg, out_feats[g].min, out_feats[g].max,
                       x.f[g].count, x.f[g].avg, x.f[g].min, x.f[g].max);
            end
          end
        end
      end
    end
    checks++;
    if (q.size() != 0 || n_tick == 0 || n_read == 0) begin
      failures++; $display("FAIL left=%0d ticks=%0d reads=%0d", q.size(), n_tick, n_read);
    end
    $display("coverage: headers=%0d reads=%0d ticks=%0d", n_hdr, n_read, n_tick);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
