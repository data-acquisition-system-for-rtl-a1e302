// tb_proton_counter_daq: end-to-end test of the three-FPGA readout at its
// full size (144 strips, default parameters).
//
// Stimulus: every strip carries a random pulse train at 1 ns resolution, with
// a rate that peaks at the centre of the sensor like a beam spot; some words
// carry bursts of five 1 ns pulses, some pulses straddle word boundaries and
// some lines stay high for several words. The host side of each FPGA is
// driven through its register port: thresholds, period, run and clear.
//
// Checking: each FPGA's record stream is received with random back-pressure
// and decoded. A reference model counts rising edges sample by sample; at the
// cycle an FPGA takes its snapshot (observed on the unit's internal snapshot
// request) the reference counts and timestamp are queued, and every record
// must carry them, together with the magic word, FPGA id, channel number,
// sequence number, the threshold values last written and an overrun count
// equal to the ticks the unit could not serve.
//
// Phases: (1) default 1 ms period, two records per FPGA; (2) 50-cycle period,
// shorter than a record, with back-pressure, to force overruns; (3) stop,
// clear and new thresholds; (4) a short run to check counts restart from 0.
// Each mechanism is counted and must occur at least once.
module tb_proton_counter_daq;
  import daq_pkg::*;
  localparam int NF = N_FPGA, N = N_CH_PER_FPGA, K = N_CHIP_PER_FPGA, R = SER_RATIO;
  localparam int NS = NF * N;
  localparam int NWORDS = 5 + N + K + (N + 3) / 4;

  logic clk = 0, rst = 1;
  logic [R-1:0]      samples    [NS];
  logic              host_wr    [NF];
  logic [ADDR_W-1:0] host_addr  [NF];
  logic [WORD_W-1:0] host_wdata [NF];
  logic [WORD_W-1:0] host_rdata [NF];
  logic              m_valid    [NF];
  logic              m_ready    [NF];
  logic [WORD_W-1:0] m_data     [NF];
  logic              m_last     [NF];
  logic [GTH_W-1:0]  gth        [NF*K];
  logic [LTH_W-1:0]  lth        [NS];
  logic              dac_load   [NF];

  proton_counter_daq dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $time); end
  endfunction

  // ---------------- pulse source and reference counts ----------------
  int   level_left [NS];
  logic level      [NS];
  int   max_gap    [NS];
  longint unsigned ref_cnt [NS];
  logic ref_last [NS];
  longint unsigned ref_ts [NF];
  logic ref_run [NF];
  int n_multi = 0, n_boundary = 0, n_long = 0;

  function automatic logic [R-1:0] next_word(int s);
    logic [R-1:0] w;
    if ($urandom_range(999) == 0) return 10'b0101010101;  // five pulses
    for (int i = 0; i < R; i++) begin
      if (level_left[s] == 0) begin
        level[s]      = ~level[s];
        level_left[s] = level[s] ? 1 + $urandom_range($urandom_range(3) == 0 ? 25 : 6)
                                 : 1 + $urandom_range(max_gap[s]);
      end
      w[i] = level[s];
      level_left[s]--;
    end
    return w;
  endfunction

  function automatic int serial_edges(logic [R-1:0] w, logic last);
    int n = 0;
    logic p = last;
    for (int i = 0; i < R; i++) begin
      if (w[i] && !p) n++;
      p = w[i];
    end
    return n;
  endfunction

  // ---------------- expected records ----------------
  typedef struct {
    longint unsigned ts;
    longint unsigned cnt [N];
  } snap_t;
  snap_t exp_snap [NF][$];
  int    seq      [NF];
  int    ticks    [NF];
  int    snaps    [NF];
  int    exp_ov_at_snap [NF][$];
  logic [GTH_W-1:0] m_gth [NF][K];
  logic [LTH_W-1:0] m_lth [NF][N];
  int records = 0, stalls = 0, overrun_records = 0, dac_loads = 0;

  // snapshot and tick monitors
  logic snap_req_v [NF];
  logic tick_v     [NF];
  logic busy_v     [NF];
  for (genvar f = 0; f < NF; f++) begin : g_probe
    assign snap_req_v[f] = dut.g_fpga[f].u_fpga.snap_req;
    assign tick_v[f]     = dut.g_fpga[f].u_fpga.tick;
    assign busy_v[f]     = dut.g_fpga[f].u_fpga.u_pack.busy;
  end

  // Reference update at every edge: first record what a snapshot taken at
  // this edge captures, then add this cycle's words.
  logic clear_pend [NF];
  always @(posedge clk) begin
    if (!rst) begin
      for (int f = 0; f < NF; f++) begin
        if (tick_v[f]) ticks[f]++;
        if (snap_req_v[f]) begin
          snap_t sn;
          sn.ts = ref_ts[f];
          for (int c = 0; c < N; c++) sn.cnt[c] = ref_cnt[f*N + c];
          exp_snap[f].push_back(sn);
          exp_ov_at_snap[f].push_back(ticks[f] - 1 - snaps[f]);
          snaps[f]++;
        end
        if (dac_load[f]) dac_loads++;
        for (int c = 0; c < N; c++) begin
          int s;
          int e;
          s = f*N + c;
          e = serial_edges(samples[s], ref_last[s]);
          if (clear_pend[f]) ref_cnt[s] = 0;
          else if (ref_run[f]) ref_cnt[s] += e;
          if (e > 1) n_multi++;
          if (samples[s][0] && !ref_last[s]) n_boundary++;
          if (&samples[s] && ref_last[s]) n_long++;
          ref_last[s] = samples[s][R-1];
        end
        if (clear_pend[f]) ref_ts[f] = 0;
        else if (ref_run[f]) ref_ts[f]++;
      end
    end
  end

  // ---------------- record receivers ----------------
  logic [WORD_W-1:0] rx [NF][NWORDS];
  int widx [NF];
  int ready_pct = 100;

  always @(negedge clk) begin
    for (int f = 0; f < NF; f++) m_ready[f] = ($urandom_range(99) < ready_pct);
  end

  always @(posedge clk) begin
    if (!rst) begin
      for (int f = 0; f < NF; f++) begin
        if (m_valid[f] && !m_ready[f]) stalls++;
        if (m_valid[f] && m_ready[f]) begin
          rx[f][widx[f]] = m_data[f];
          check(m_last[f] == (widx[f] == NWORDS - 1), "m_last position");
          widx[f]++;
          if (widx[f] == NWORDS) begin
            widx[f] = 0;
            check_record(f);
          end
        end
      end
    end
  end

  function automatic void check_record(int f);
    snap_t sn;
    int ov;
    records++;
    if (exp_snap[f].size() == 0) begin
      check(0, $sformatf("FPGA %0d record without snapshot", f));
      return;
    end
    sn = exp_snap[f].pop_front();
    ov = exp_ov_at_snap[f].pop_front();
    check(rx[f][0] == {16'hCA7C, 4'(f), 4'h0, 8'(N)}, $sformatf("FPGA %0d header %h", f, rx[f][0]));
    check(rx[f][1] == WORD_W'(seq[f]), $sformatf("FPGA %0d sequence %0d exp %0d", f, rx[f][1], seq[f]));
    check(rx[f][2] == WORD_W'(ov), $sformatf("FPGA %0d overruns %0d exp %0d", f, rx[f][2], ov));
    if (rx[f][2] != 0) overrun_records++;
    check({rx[f][3], rx[f][4]} == 64'(sn.ts), $sformatf("FPGA %0d timestamp %0d exp %0d",
          f, {rx[f][3], rx[f][4]}, sn.ts));
    for (int c = 0; c < N; c++)
      check(rx[f][5 + c] == WORD_W'(sn.cnt[c]),
            $sformatf("FPGA %0d ch %0d count %0d exp %0d", f, c, rx[f][5 + c], sn.cnt[c]));
    for (int k = 0; k < K; k++)
      check(rx[f][5 + N + k] == WORD_W'(m_gth[f][k]), $sformatf("FPGA %0d gth %0d", f, k));
    for (int c = 0; c < N; c++)
      check(rx[f][5 + N + K + c / 4][8*(c % 4) +: 8] == m_lth[f][c], $sformatf("FPGA %0d lth %0d", f, c));
    seq[f]++;
  endfunction

  // ---------------- host access ----------------
  task automatic host_write(int f, logic [ADDR_W-1:0] a, logic [WORD_W-1:0] d);
    @(negedge clk);
    host_wr[f] = 1; host_addr[f] = a; host_wdata[f] = d;
    @(negedge clk);
    host_wr[f] = 0;
  endtask

  task automatic set_run(logic r, logic cl);
    // all FPGAs in the same cycle, as a broadcast command would
    @(negedge clk);
    for (int f = 0; f < NF; f++) begin
      host_wr[f] = 1; host_addr[f] = REG_CTRL; host_wdata[f] = {30'b0, cl, r};
    end
    @(posedge clk);
    // the register takes the value at this edge: counting starts next cycle
    #1;
    for (int f = 0; f < NF; f++) begin
      host_wr[f] = 0;
      ref_run[f] = r;
      clear_pend[f] = cl;
    end
    @(posedge clk);
    #1;
    for (int f = 0; f < NF; f++) clear_pend[f] = 0;
  endtask

  task automatic write_thresholds();
    for (int f = 0; f < NF; f++) begin
      for (int k = 0; k < K; k++) begin
        m_gth[f][k] = GTH_W'($urandom);
        host_write(f, REG_GTH0 + ADDR_W'(k), WORD_W'(m_gth[f][k]));
      end
      for (int c = 0; c < N; c++) begin
        m_lth[f][c] = LTH_W'($urandom);
        host_write(f, REG_LTH0 + ADDR_W'(c), WORD_W'(m_lth[f][c]));
      end
    end
  endtask

  task automatic drain();
    ready_pct = 100;
    for (int i = 0; i < 400; i++) @(negedge clk);
  endtask

  // ---------------- sample drive ----------------
  always @(negedge clk) begin
    for (int s = 0; s < NS; s++) samples[s] = next_word(s);
  end

  // ---------------- main sequence ----------------
  initial begin
    int rec_phase1;
    for (int s = 0; s < NS; s++) begin
      int d;
      d = (s > NS/2) ? s - NS/2 : NS/2 - s;
      max_gap[s] = 8 + 4 * d;          // denser near the centre strips
      level_left[s] = 1 + s % 7; level[s] = 0;
      ref_cnt[s] = 0; ref_last[s] = 0; samples[s] = '0;
    end
    for (int f = 0; f < NF; f++) begin
      host_wr[f] = 0; host_addr[f] = '0; host_wdata[f] = '0; m_ready[f] = 1;
      ref_ts[f] = 0; ref_run[f] = 0; clear_pend[f] = 0;
      seq[f] = 0; ticks[f] = 0; snaps[f] = 0; widx[f] = 0;
    end
    repeat (4) @(posedge clk);
    #1 rst = 0;

    // reset values read back
    for (int f = 0; f < NF; f++) begin
      @(negedge clk) host_addr[f] = REG_PERIOD;
      #1 check(host_rdata[f] == DEFAULT_PERIOD, "default period readback");
    end
    write_thresholds();

    // phase 1: default period, two records per FPGA
    ready_pct = 90;
    set_run(1, 1);
    repeat (2 * DEFAULT_PERIOD + 300) @(negedge clk);
    rec_phase1 = records;
    check(rec_phase1 == 2 * NF, $sformatf("phase 1 records %0d", rec_phase1));

    // phase 2: short period and back-pressure force overruns
    for (int f = 0; f < NF; f++) host_write(f, REG_PERIOD, 32'd50);
    ready_pct = 60;
    repeat (3000) @(negedge clk);

    // phase 3: stop, drain, new thresholds, clear
    set_run(0, 0);
    drain();
    for (int f = 0; f < NF; f++) begin
      @(negedge clk) host_addr[f] = REG_STATUS;
      #1 check(host_rdata[f] == WORD_W'(ticks[f] - snaps[f]), "overrun status readback");
    end
    write_thresholds();
    for (int f = 0; f < NF; f++) host_write(f, REG_PERIOD, 32'd400);

    // phase 4: clear and a short run
    set_run(1, 1);
    repeat (1300) @(negedge clk);
    set_run(0, 0);
    drain();

    for (int f = 0; f < NF; f++)
      check(exp_snap[f].size() == 0 && widx[f] == 0, "all snapshots delivered");
    // mechanisms exercised
    check(records >= 2 * NF + 10, $sformatf("records %0d", records));
    check(stalls > 0,          $sformatf("back-pressure stalls %0d", stalls));
    check(overrun_records > 0, $sformatf("records reporting overruns %0d", overrun_records));
    check(dac_loads == 2 * NF * (K + N), $sformatf("dac_load pulses %0d", dac_loads));
    check(n_multi > 0,    $sformatf("words with several pulses %0d", n_multi));
    check(n_boundary > 0, $sformatf("edges at a word boundary %0d", n_boundary));
    check(n_long > 0,     $sformatf("pulses spanning a whole word %0d", n_long));
    $display("records=%0d stalls=%0d overrun_records=%0d dac_loads=%0d multi=%0d boundary=%0d long=%0d",
             records, stalls, overrun_records, dac_loads, n_multi, n_boundary, n_long);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2 * DEFAULT_PERIOD + 20000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
