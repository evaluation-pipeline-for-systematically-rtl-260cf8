// tb_table_configs: runs the four configurations of the source's results
// table (memory stages 1 or 3, hash width 4 or 5) side by side, each against
// its own reference model, and sums their checks.
module tb_table_configs;
  logic done [4];
  int   c [4];
  int   f [4];
  int   checks, failures;

  fe_config_check #(.HW(4), .MS(1)) u_s1_h4 (.done(done[0]), .checks(c[0]), .failures(f[0]));
  fe_config_check #(.HW(4), .MS(3)) u_s3_h4 (.done(done[1]), .checks(c[1]), .failures(f[1]));
  fe_config_check #(.HW(5), .MS(1)) u_s1_h5 (.done(done[2]), .checks(c[2]), .failures(f[2]));
  fe_config_check #(.HW(5), .MS(3)) u_s3_h5 (.done(done[3]), .checks(c[3]), .failures(f[3]));

  initial begin
    #2000000;
    $display("TB_RESULT checks=%0d failures=%0d", c[0] + c[1] + c[2] + c[3], 1 + f[0] + f[1] + f[2] + f[3]);
    $finish;
  end

  initial begin
    #1;
    wait (done[0] && done[1] && done[2] && done[3]);
    checks = c[0] + c[1] + c[2] + c[3];
    failures = f[0] + f[1] + f[2] + f[3];
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
