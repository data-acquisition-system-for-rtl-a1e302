// tb_config_regs: self-checking test of the host register file.
//
// Writes random values to every threshold register in random order and
// checks them on the outputs and by readback; checks the run bit, the
// one-cycle clear pulse, the readout period and its reset value, the
// read-only status word, that `dac_load` pulses exactly once per threshold
// write, and that unmapped addresses read 0 and change nothing.
module tb_config_regs;
  import daq_pkg::*;
  localparam int N = 48, K = 2;

  logic clk = 0, rst = 1, wr_en = 0;
  logic [ADDR_W-1:0] addr = '0;
  logic [WORD_W-1:0] wdata = '0, rdata, overruns = '0, period;
  logic run, clear, dac_load;
  logic [GTH_W-1:0] gth [K];
  logic [LTH_W-1:0] lth [N];

  config_regs #(.N_CH(N), .N_CHIP(K)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [GTH_W-1:0] m_gth [K];
  logic [LTH_W-1:0] m_lth [N];
  int loads = 0;

  always @(posedge clk) if (!rst && dac_load) loads++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic wr(logic [ADDR_W-1:0] a, logic [WORD_W-1:0] d);
    addr = a; wdata = d; wr_en = 1;
    @(posedge clk); #1;
    wr_en = 0;
  endtask

  task automatic compare_all();
    for (int k = 0; k < K; k++) begin
      check(gth[k] == m_gth[k], $sformatf("gth[%0d] output", k));
      addr = REG_GTH0 + ADDR_W'(k); #0.1;
      check(rdata == WORD_W'(m_gth[k]), $sformatf("gth[%0d] readback", k));
    end
    for (int c = 0; c < N; c++) begin
      check(lth[c] == m_lth[c], $sformatf("lth[%0d] output", c));
      addr = REG_LTH0 + ADDR_W'(c); #0.1;
      check(rdata == WORD_W'(m_lth[c]), $sformatf("lth[%0d] readback", c));
    end
  endtask

  initial begin
    foreach (m_gth[k]) m_gth[k] = '0;
    foreach (m_lth[c]) m_lth[c] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // reset values
    check(!run && !clear && !dac_load, "reset control");
    check(period == 100_000, "reset period");
    compare_all();
    // random threshold writes
    for (int n = 0; n < 400; n++) begin
      int n_before;
      n_before = loads;
      if ($urandom_range(3) == 0) begin
        int k;
        logic [WORD_W-1:0] d;
        k = $urandom_range(K-1);
        d = $urandom;
        wr(REG_GTH0 + ADDR_W'(k), d);
        m_gth[k] = d[GTH_W-1:0];
      end else begin
        int c;
        logic [WORD_W-1:0] d;
        c = $urandom_range(N-1);
        d = $urandom;
        wr(REG_LTH0 + ADDR_W'(c), d);
        m_lth[c] = d[LTH_W-1:0];
      end
      check(dac_load, "dac_load after threshold write");
      @(posedge clk); #1;
      check(loads == n_before + 1, "one dac_load per write");
    end
    compare_all();
    // unmapped addresses
    for (int a = 0; a < 256; a++) begin
      bit mapped;
      mapped = (a <= 2) || (a >= REG_GTH0 && a < REG_GTH0 + K) || (a >= REG_LTH0 && a < REG_LTH0 + N);
      if (!mapped) begin
        int n_before;
        n_before = loads;
        wr(ADDR_W'(a), 32'hFFFF_FFFF);
        addr = ADDR_W'(a); #0.1;
        check(rdata == 0, $sformatf("unmapped 0x%0h reads 0", a));
        @(posedge clk); #1;
        check(loads == n_before, "no dac_load for unmapped write");
      end
    end
    compare_all();
    check(period == 100_000 && !run, "unmapped writes leave control alone");
    // run, clear pulse, period, status
    wr(REG_CTRL, 32'h1);
    check(run && !clear, "run set");
    addr = REG_CTRL; #0.1; check(rdata == 1, "ctrl readback");
    wr(REG_CTRL, 32'h3);
    check(run && clear, "clear pulse");
    @(posedge clk); #1;
    check(!clear && run, "clear lasts one cycle");
    wr(REG_PERIOD, 32'd1234);
    check(period == 1234, "period");
    addr = REG_PERIOD; #0.1; check(rdata == 1234, "period readback");
    overruns = 32'd77;
    addr = REG_STATUS; #0.1; check(rdata == 77, "status readback");
    wr(REG_STATUS, 32'd5);
    addr = REG_STATUS; #0.1; check(rdata == 77, "status is read only");
    wr(REG_CTRL, 32'h0);
    check(!run, "run cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
