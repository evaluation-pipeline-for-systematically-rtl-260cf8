// fe_config_check: drives one feature_extractor instance of a given
// configuration (HASH_W, MEM_STAGES) with random headers, read requests and
// window ticks and compares every output with the reference model. Reports
// its check and failure counts on ports once done is high. Used by
// tb_table_configs to run all four configurations of the results table.
module fe_config_check
  import fe_pkg::*;
  import fe_ref_pkg::*;
#(
  parameter int HW     = 4,
  parameter int MS     = 3,
  parameter int N_REQ  = 5000,
  parameter int WINDOW = 23
) (
  output logic done,
  output int   checks,
  output int   failures
);

  logic             clk = 0, rst_n = 0;
  logic [31:0]      cfg_window_cycles;
  logic             hdr_valid = 0;
  logic [HDR_W-1:0] hdr_data = '0;
  logic             rd_valid = 0;
  logic [HW-1:0]    rd_index = '0;
  logic             rd_ready, window_tick, feat_valid, feat_is_read;
  logic [HW-1:0]    feat_idx [N_LANES];
  feat_t            feat     [N_LANES][MS];

  feature_extractor #(.HASH_W(HW), .MEM_STAGES(MS)) dut (.*);

  always #5 clk = ~clk;

  typedef struct {
    int        cycle;
    bit        is_read;
    int        idx [N_LANES];
    ref_feat_t f   [N_LANES][MS];
  } exp_t;
  exp_t q[$];
  SketchModel m [N_LANES];
  int cycle = 0;
  int n_tick = 0, n_read = 0;

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

  initial begin
    bit p_valid, p_read;
    int p_idx [N_LANES];
    int p_val;
    logic [31:0] src [16];
    logic [31:0] dst [16];
    logic [15:0] port [16];
    done = 0; checks = 0; failures = 0;
    p_valid = 0; p_read = 0; p_val = 0;
    cfg_window_cycles = WINDOW;
    for (int l = 0; l < N_LANES; l++) m[l] = new(HW, MS);
    for (int i = 0; i < 16; i++) begin
      src[i] = $urandom; dst[i] = $urandom; port[i] = 16'($urandom);
    end
    @(negedge clk); @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < N_REQ + LANE_LAT + 2; i++) begin
      bit hv, rv;
      int a, b, c, d, r;
      logic [15:0] len;
      hv = (i < N_REQ) && (($urandom % 5) != 0);
      rv = (i < N_REQ) && !hv && (($urandom % 2) == 0);
      a = $urandom % 16; b = $urandom % 16; c = $urandom % 16; d = $urandom % 16;
      r = $urandom % (1 << HW);
      len = 16'(40 + ($urandom % 1461));
      hdr_valid = hv;
      hdr_data  = make_hdr(src[a], dst[b], port[c], port[d], len);
      rd_valid  = rv;
      rd_index  = HW'(r);
      p_valid = hv || rv;
      p_read  = !hv;
      p_val   = int'(len);
      p_idx[0] = hv ? ref_hash(longint'(src[a]), 32, HW) : r;
      p_idx[1] = hv ? ref_hash(longint'(dst[b]), 32, HW) : r;
      p_idx[2] = hv ? ref_hash(longint'(port[c]), 16, HW) : r;
      p_idx[3] = hv ? ref_hash(longint'(port[d]), 16, HW) : r;
      if (rv) n_read++;
      @(negedge clk);
      cycle++;
      if (window_tick) begin
        n_tick++;
        for (int l = 0; l < N_LANES; l++) m[l].age();
      end
      if (p_valid) begin
        exp_t x;
        x.cycle = cycle - 1 + LANE_LAT;
        x.is_read = p_read;
        for (int l = 0; l < N_LANES; l++) begin
          x.idx[l] = p_idx[l];
          if (!p_read) m[l].record(p_idx[l], longint'(p_val));
          for (int g = 0; g < MS; g++) x.f[l][g] = m[l].feat(p_idx[l], g);
        end
        q.push_back(x);
      end
      if (feat_valid) begin
        exp_t x;
        checks++;
        if (q.size() == 0) failures++;
        else begin
          x = q.pop_front();
          if (x.cycle != cycle || x.is_read != feat_is_read) failures++;
          for (int l = 0; l < N_LANES; l++) begin
            checks++;
            if (int'(feat_idx[l]) != x.idx[l]) failures++;
            for (int g = 0; g < MS; g++) begin
              checks++;
              if (longint'(feat[l][g].count) != x.f[l][g].count
                  || longint'(feat[l][g].avg) != x.f[l][g].avg
                  || longint'(feat[l][g].min) != x.f[l][g].min
                  || longint'(feat[l][g].max) != x.f[l][g].max) begin
                failures++;
                if (failures < 5)
                  $display("FAIL HW=%0d MS=%0d lane %0d g %0d", HW, MS, l, g);
              end
            end
          end
        end
      end
    end
    checks++;
    if (q.size() != 0 || n_tick == 0 || n_read == 0) failures++;
    $display("config Mem Stages %0d, Hash Width %0d: %0d entries/lane, ticks=%0d reads=%0d checks=%0d failures=%0d",
             MS, HW, 1 << HW, n_tick, n_read, checks, failures);
    done = 1;
  end

endmodule
