// tb_feature_extractor: end-to-end test of the feature extractor at its
// default configuration (HASH_W = 4, MEM_STAGES = 3, four lanes).
//
// Headers are built field by field (IPv4 source/destination, TCP ports,
// IPv4 length; all other bytes random) and streamed at up to one per cycle.
// A reference model with one sketch per lane predicts every feature vector,
// which must appear exactly LANE_LAT cycles after its header or read request.
// Phases: (1) mixed traffic with a 37-cycle window, read requests that are
// stalled by headers, and a forced hash collision; (2) aging switched off and
// one flow repeated until its count saturates; (3) a short window with idle
// input so every generation ages out, then a dump of all entries.
// Each mechanism is counted, and one that never occurred is a failure.
module tb_feature_extractor;
  import fe_pkg::*;
  import fe_ref_pkg::*;

  localparam int HW = 4;
  localparam int MS = 3;

  logic             clk = 0, rst_n = 0;
  logic [31:0]      cfg_window_cycles = 0;
  logic             hdr_valid = 0;
  logic [HDR_W-1:0] hdr_data = '0;
  logic             rd_valid = 0;
  logic [HW-1:0]    rd_index = '0;
  logic             rd_ready, window_tick, feat_valid, feat_is_read;
  logic [HW-1:0]    feat_idx [N_LANES];
  feat_t            feat     [N_LANES][MS];

  feature_extractor dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  // Mechanism counters.
  int n_hdr = 0, n_read = 0, n_read_stall = 0, n_tick = 0, n_tick_with_pkt = 0;
  int n_collision = 0, n_saturated = 0, n_aged_out = 0, n_b2b = 0, n_tick_period_ok = 0;

  typedef struct {
    int        cycle;
    bit        is_read;
    int        idx [N_LANES];
    ref_feat_t f   [N_LANES][MS];
  } exp_t;
  exp_t q[$];

  SketchModel m [N_LANES];
  int cycle = 0;
  bit p_valid = 0, p_read = 0;
  int p_idx [N_LANES];
  int p_val = 0;
  int last_tick = -1;
  bit prev_hdr = 0;

  logic [31:0] src_pool [8];
  logic [31:0] dst_pool [4];
  logic [15:0] port_pool [6];

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [HDR_W-1:0] make_hdr(logic [31:0] src, logic [31:0] dst,
                                                logic [15:0] sp, logic [15:0] dp,
                                                logic [15:0] len);
    logic [HDR_W-1:0] h;
    for (int b = 0; b < HDR_BYTES; b++) h[8*b +: 8] = 8'($urandom);
    for (int b = 0; b < 4; b++) begin
      h[8*(OFF_IP_SRC+b) +: 8] = src[8*(3-b) +: 8];
      h[8*(OFF_IP_DST+b) +: 8] = dst[8*(3-b) +: 8];
    end
    for (int b = 0; b < 2; b++) begin
      h[8*(OFF_SRC_PORT+b) +: 8] = sp[8*(1-b) +: 8];
      h[8*(OFF_DST_PORT+b) +: 8] = dp[8*(1-b) +: 8];
      h[8*(OFF_IP_LEN+b) +: 8]   = len[8*(1-b) +: 8];
    end
    return h;
  endfunction

  // Compare the outputs of this cycle with the oldest expectation.
  task automatic check_outputs();
    if (!feat_valid) return;
    checks++;
    if (q.size() == 0) begin
      failures++; $display("FAIL unexpected output at %0d", cycle);
      return;
    end
    begin
      exp_t x;
      x = q.pop_front();
      if (x.cycle != cycle || x.is_read != feat_is_read) begin
        failures++;
        $display("FAIL cycle %0d exp %0d is_read %0b exp %0b", cycle, x.cycle, feat_is_read, x.is_read);
      end
      for (int l = 0; l < N_LANES; l++) begin
        checks++;
        if (int'(feat_idx[l]) != x.idx[l]) begin
          failures++; $display("FAIL lane %0d idx %0d exp %0d", l, feat_idx[l], x.idx[l]);
        end
        for (int g = 0; g < MS; g++) begin
          checks++;
          if (longint'(feat[l][g].count) != x.f[l][g].count || longint'(feat[l][g].avg) != x.f[l][g].avg
              || longint'(feat[l][g].min) != x.f[l][g].min || longint'(feat[l][g].max) != x.f[l][g].max) begin
            failures++;
            $display("FAIL lane %0d idx %0d g %0d got %0d/%0d/%0d/%0d exp %0d/%0d/%0d/%0d", l, x.idx[l], g,
                     feat[l][g].count, feat[l][g].avg, feat[l][g].min, feat[l][g].max,
                     x.f[l][g].count, x.f[l][g].avg, x.f[l][g].min, x.f[l][g].max);
          end
        end
      end
    end
  endtask

  // One clock cycle: drive (hv: header valid, rv: read request) then
  // advance the model and check the outputs at the next falling edge.
  task automatic cycle_step(bit hv, logic [31:0] src, logic [31:0] dst, logic [15:0] sp,
                            logic [15:0] dp, logic [15:0] len, bit rv, int ridx);
    bit accepted_read;
    hdr_valid = hv;
    hdr_data  = make_hdr(src, dst, sp, dp, len);
    rd_valid  = rv;
    rd_index  = HW'(ridx);
    #1;
    checks++;
    if (rd_ready !== !hv) begin failures++; $display("FAIL rd_ready"); end
    accepted_read = rv && !hv;
    if (rv && hv) n_read_stall++;
    if (hv && prev_hdr) n_b2b++;
    prev_hdr = hv;
    if (hv) n_hdr++;
    if (accepted_read) n_read++;
    p_valid = hv || accepted_read;
    p_read  = !hv;
    p_val   = int'(len);
    p_idx[0] = hv ? ref_hash(longint'(src), 32, HW) : ridx;
    p_idx[1] = hv ? ref_hash(longint'(dst), 32, HW) : ridx;
    p_idx[2] = hv ? ref_hash(longint'(sp), 16, HW) : ridx;
    p_idx[3] = hv ? ref_hash(longint'(dp), 16, HW) : ridx;
    if (hv && src != src_pool[0] && p_idx[0] == ref_hash(longint'(src_pool[0]), 32, HW)
        && m[0].cnt[p_idx[0]][0] > 0)
      n_collision++;
    @(negedge clk);
    cycle++;
    // The tick now visible acts in the same buffer cycle as this request.
    if (window_tick) begin
      n_tick++;
      if (p_valid && !p_read) n_tick_with_pkt++;
      for (int l = 0; l < N_LANES; l++) begin
        for (int e = 0; e < (1 << HW); e++)
          if (m[l].cnt[e][MS-1] > 0) n_aged_out++;
        m[l].age();
      end
      if (last_tick >= 0 && cfg_window_cycles != 0) begin
        checks++;
        if (cycle - last_tick != int'(cfg_window_cycles)) begin
          failures++; $display("FAIL tick spacing %0d exp %0d", cycle - last_tick, cfg_window_cycles);
        end else n_tick_period_ok++;
      end
      last_tick = cycle;
    end
    if (p_valid) begin
      exp_t x;
      x.cycle = cycle - 1 + LANE_LAT;
      x.is_read = p_read;
      for (int l = 0; l < N_LANES; l++) begin
        x.idx[l] = p_idx[l];
        if (!p_read) m[l].record(p_idx[l], longint'(p_val));
        if (!p_read && m[l].cnt[p_idx[l]][0] == CNT_MAX) n_saturated++;
        for (int g = 0; g < MS; g++) x.f[l][g] = m[l].feat(p_idx[l], g);
      end
      q.push_back(x);
    end
    check_outputs();
  endtask

  task automatic random_traffic(int n);
    int pending_rd = -1;
    for (int i = 0; i < n; i++) begin
      bit hv;
      hv = ($urandom % 5) != 0;
      if (pending_rd < 0 && ($urandom % 6) == 0) pending_rd = $urandom % (1 << HW);
      cycle_step(hv, src_pool[$urandom % 8], dst_pool[$urandom % 4], port_pool[$urandom % 6],
                 port_pool[$urandom % 6], 16'(40 + ($urandom % 1461)), pending_rd >= 0,
                 pending_rd < 0 ? 0 : pending_rd);
      if (!hv) pending_rd = -1;
    end
  endtask

  task automatic idle(int n);
    for (int i = 0; i < n; i++) cycle_step(0, 0, 0, 0, 0, 0, 0, 0);
  endtask

  initial begin
    for (int l = 0; l < N_LANES; l++) m[l] = new(HW, MS);
    for (int i = 0; i < 8; i++) src_pool[i] = $urandom;
    // Differs from src_pool[0] in bits 0 and 4: same XOR-fold index.
    src_pool[7] = src_pool[0] ^ 32'h0000_0011;
    for (int i = 0; i < 4; i++) dst_pool[i] = $urandom;
    for (int i = 0; i < 6; i++) port_pool[i] = 16'($urandom);
    port_pool[0] = 16'd80;
    port_pool[1] = 16'd443;
    cfg_window_cycles = 37;
    @(negedge clk); @(negedge clk);
    rst_n = 1;

    // Phase 1: mixed traffic, 37-cycle windows.
    random_traffic(4000);

    // Phase 2: no aging; one flow until its counts saturate.
    cfg_window_cycles = 0;
    idle(2);
    last_tick = -1;
    for (int i = 0; i < 65600; i++)
      cycle_step(1, src_pool[1], dst_pool[1], port_pool[1], port_pool[2],
                 16'(60 + (i % 1400)), 0, 0);
    cycle_step(0, 0, 0, 0, 0, 0, 1, 0);

    // Phase 3: short windows and idle input, then dump every entry.
    cfg_window_cycles = 5;
    idle(30);
    last_tick = -1;
    random_traffic(300);
    for (int e = 0; e < (1 << HW); e++) cycle_step(0, 0, 0, 0, 0, 0, 1, e);
    idle(LANE_LAT + 2);

    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d results missing", q.size()); end
    $display("coverage: headers=%0d back_to_back=%0d reads=%0d read_stalls=%0d ticks=%0d",
             n_hdr, n_b2b, n_read, n_read_stall, n_tick);
    $display("coverage: tick_with_packet=%0d tick_period_ok=%0d collisions=%0d saturated=%0d aged_out=%0d",
             n_tick_with_pkt, n_tick_period_ok, n_collision, n_saturated, n_aged_out);
    begin
      int cov [10];
      cov = '{n_hdr, n_b2b, n_read, n_read_stall, n_tick, n_tick_with_pkt, n_tick_period_ok,
              n_collision, n_saturated, n_aged_out};
      for (int k = 0; k < 10; k++) begin
        checks++;
        if (cov[k] == 0) begin failures++; $display("FAIL mechanism %0d never occurred", k); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
