// shift_hash: shift-and-XOR hash from a header key to a sketch index.
//
// The source states only that the sketch hashes are built from shifters.
// This module folds the key: it XORs the key shifted right by 0, HASH_W,
// 2*HASH_W, ... bits and keeps the low HASH_W bits, i.e. it XORs all
// HASH_W-bit slices of the key. Every key bit therefore affects exactly one
// index bit, so keys that differ in a single bit never collide. The fold is
// this design's choice.
//
// Interface: key (KEY_W) in, idx (HASH_W) out. Purely combinational.
module shift_hash #(
  parameter int KEY_W  = 32,
  parameter int HASH_W = 4
) (
  input  logic [KEY_W-1:0]  key,
  output logic [HASH_W-1:0] idx
);

  localparam int N_SLICES = (KEY_W + HASH_W - 1) / HASH_W;

  always_comb begin
    logic [KEY_W-1:0] acc;
    acc = '0;
    for (int i = 0; i < N_SLICES; i++) begin
      acc = acc ^ (key >> (i * HASH_W));
    end
    idx = acc[HASH_W-1:0];
  end

endmodule
