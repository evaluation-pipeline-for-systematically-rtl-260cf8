// fe_ref_pkg: independent reference model of the sketch feature extractor,
// used by the testbenches. It is written from the behavioural description
// (not from the RTL): the hash is computed bit by bit (index bit j is the XOR
// of every key bit i with i mod HASH_W == j), and entries are plain integers.
package fe_ref_pkg;

  localparam int MAXE = 64;   // up to HASH_W = 6
  localparam int MAXG = 8;    // up to 8 generations
  localparam longint CNT_MAX = 65535;

  function automatic int ref_hash(longint unsigned key, int key_bits, int hash_w);
    int idx = 0;
    for (int i = 0; i < key_bits; i++)
      if (key[i]) idx ^= (1 << (i % hash_w));
    return idx;
  endfunction

  typedef struct {
    longint count;
    longint avg;
    longint min;
    longint max;
  } ref_feat_t;

  class SketchModel;
    int hash_w, stages;
    longint cnt [MAXE][MAXG];
    longint sum [MAXE][MAXG];
    longint mn  [MAXE][MAXG];
    longint mx  [MAXE][MAXG];

    function new(int hash_w, int stages);
      this.hash_w = hash_w;
      this.stages = stages;
      clear();
    endfunction

    function void clear();
      for (int e = 0; e < MAXE; e++)
        for (int g = 0; g < MAXG; g++) begin
          cnt[e][g] = 0; sum[e][g] = 0; mn[e][g] = 65535; mx[e][g] = 0;
        end
    endfunction

    function void age();
      for (int e = 0; e < (1 << hash_w); e++) begin
        for (int g = stages - 1; g > 0; g--) begin
          cnt[e][g] = cnt[e][g-1]; sum[e][g] = sum[e][g-1];
          mn[e][g]  = mn[e][g-1];  mx[e][g]  = mx[e][g-1];
        end
        cnt[e][0] = 0; sum[e][0] = 0; mn[e][0] = 65535; mx[e][0] = 0;
      end
    endfunction

    function void record(int e, longint v);
      if (cnt[e][0] == CNT_MAX) return;
      cnt[e][0]++;
      sum[e][0] += v;
      if (v < mn[e][0]) mn[e][0] = v;
      if (v > mx[e][0]) mx[e][0] = v;
    endfunction

    function ref_feat_t feat(int e, int g);
      ref_feat_t f;
      f.count = cnt[e][g];
      if (cnt[e][g] == 0) begin
        f.avg = 0; f.min = 0; f.max = 0;
      end else begin
        f.avg = sum[e][g] / cnt[e][g];
        f.min = mn[e][g];
        f.max = mx[e][g];
      end
      return f;
    endfunction
  endclass

endpackage
