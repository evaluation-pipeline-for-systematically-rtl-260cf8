// tb_shift_hash: checks shift_hash against a bit-by-bit XOR-fold reference
// for hash widths 4 and 5 (the two widths of the source's results table),
// on directed keys (zero, single bits, all ones) and random keys.
module tb_shift_hash;
  import fe_ref_pkg::*;

  logic [31:0] key;
  logic [3:0]  idx4;
  logic [4:0]  idx5;
  int checks = 0, failures = 0;

  shift_hash #(.KEY_W(32), .HASH_W(4)) dut4 (.key(key), .idx(idx4));
  shift_hash #(.KEY_W(32), .HASH_W(5)) dut5 (.key(key), .idx(idx5));

  task automatic check_key(logic [31:0] k);
    key = k;
    #1;
    checks += 2;
    if (int'(idx4) != ref_hash(k, 32, 4)) begin
      failures++;
      $display("FAIL key=%h idx4=%0d exp=%0d", k, idx4, ref_hash(k, 32, 4));
    end
    if (int'(idx5) != ref_hash(k, 32, 5)) begin
      failures++;
      $display("FAIL key=%h idx5=%0d exp=%0d", k, idx5, ref_hash(k, 32, 5));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    check_key('0);
    check_key('1);
    for (int i = 0; i < 32; i++) check_key(32'(1) << i);
    for (int i = 0; i < 2000; i++) check_key($urandom);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
