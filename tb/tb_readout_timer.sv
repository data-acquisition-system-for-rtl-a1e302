// tb_readout_timer: self-checking test of the periodic readout tick.
//
// For several periods (1, 2, 7, 100 and 1000 cycles) the time between
// successive ticks is measured and must equal the period; the first tick
// must come `period` cycles after `run` rises. A zero period and `run` low
// must give no tick; `clear` must restart the interval.
module tb_readout_timer;
  logic clk = 0, rst = 1, run = 0, clear = 0, tick;
  logic [31:0] period = 0;

  readout_timer #(.PERIOD_W(32)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  // run for n cycles from a stopped timer, return the cycles (counted from
  // the first running edge) at which ticks were seen
  task automatic measure(int p, int n, output int first, output int count, output int bad);
    int since = 0;
    first = -1; count = 0; bad = 0;
    period = p;
    run = 1;
    for (int i = 1; i <= n; i++) begin
      @(posedge clk); #1;
      since++;
      if (tick) begin
        if (first < 0) first = i;
        else if (since != p) bad++;
        since = 0;
        count++;
      end
    end
    run = 0;
    @(posedge clk); #1;
  endtask

  initial begin
    int first, count, bad;
    int ps[5] = '{1, 2, 7, 100, 1000};
    repeat (3) @(posedge clk);
    #1 rst = 0;
    foreach (ps[k]) begin
      measure(ps[k], 5000, first, count, bad);
      check(first == ps[k], $sformatf("first tick for period %0d at %0d", ps[k], first));
      check(bad == 0, $sformatf("tick spacing for period %0d", ps[k]));
      check(count == 5000 / ps[k], $sformatf("tick count %0d for period %0d", count, ps[k]));
    end
    measure(0, 500, first, count, bad);
    check(count == 0, "no tick with period 0");
    // run low: no tick
    period = 3; run = 0;
    repeat (20) begin @(posedge clk); #1; check(!tick, "no tick while stopped"); end
    // clear restarts the interval
    period = 10; run = 1;
    repeat (7) @(posedge clk);
    #1 clear = 1;
    @(posedge clk); #1 clear = 0;
    begin
      int n = 0;
      while (!tick && n < 50) begin @(posedge clk); #1; n++; end
      check(n == 10, $sformatf("interval after clear %0d", n));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
