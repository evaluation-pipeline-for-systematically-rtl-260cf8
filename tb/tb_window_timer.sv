// tb_window_timer: checks the window tick period. With period P the tick
// must be a single-cycle pulse every P cycles, the first P cycles after
// reset; period 0 must give no ticks; a new period applies from the next
// window. Reference: an independent cycle counter in the testbench.
module tb_window_timer;
  logic        clk = 0, rst_n = 0;
  logic [31:0] period;
  logic        tick;
  int checks = 0, failures = 0;

  window_timer dut (.clk(clk), .rst_n(rst_n), .period(period), .tick(tick));

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Run for n cycles with a fixed period, checking tick against the cycle
  // number since the window started.
  task automatic run(int p, int n);
    int since = 0;
    int ticks = 0;
    period = p;
    for (int c = 0; c < n; c++) begin
      @(negedge clk);
      since++;
      checks++;
      if (tick !== (p != 0 && since % p == 0)) begin
        failures++;
        $display("FAIL period=%0d cycle=%0d tick=%0b", p, since, tick);
      end
      if (tick) ticks++;
    end
    checks++;
    if (p != 0 && ticks != n / p) begin
      failures++;
      $display("FAIL period=%0d ticks=%0d exp=%0d", p, ticks, n / p);
    end
  endtask

  task automatic do_reset();
    rst_n = 0;
    @(negedge clk);
    @(negedge clk);
    rst_n = 1;
  endtask

  initial begin
    period = 7;
    do_reset();
    run(7, 70);
    do_reset();
    period = 1;
    run(1, 20);
    do_reset();
    period = 0;
    run(0, 50);
    do_reset();
    period = 13;
    run(13, 130);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
