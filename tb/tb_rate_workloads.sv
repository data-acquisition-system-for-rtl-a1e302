// tb_rate_workloads: one FPGA counting unit at the pulse rates the detector
// is specified for.
//
// Each strip is driven by a discriminator model: proton arrivals are random
// (exponential spacing) at a given mean rate; an arrival while the output is
// busy is lost (non-paralyzable dead time of 10 ns from the pulse start,
// pulse width 4..9 ns), as a discriminator with a 10 ns dead time would do.
// The model counts the pulses it emits; every record must carry exactly those
// counts (the readout itself must lose nothing), and the mean rate seen in
// the records must match the programmed rate within statistics.
//
// Rates per strip (strip area 180 um x 2.7 cm = 0.0486 cm2):
//   4.86 MHz  fluence 1e8 p/(cm2 s), the design point
//   24.3 MHz  fluence 5e8 p/(cm2 s), the highest tested beam flux
//   100 MHz   the front end's maximum rate: a periodic pulse every 10 ns
// Readout period: 10 000 cycles (100 us), three records per rate.
module tb_rate_workloads;
  import daq_pkg::*;
  localparam int N = N_CH_PER_FPGA, K = N_CHIP_PER_FPGA, R = SER_RATIO;
  localparam int PERIOD = 10_000;
  localparam int NWORDS = 5 + N + K + (N + 3) / 4;

  logic clk = 0, rst = 1;
  logic [R-1:0]      samples [N];
  logic              host_wr = 0;
  logic [ADDR_W-1:0] host_addr = '0;
  logic [WORD_W-1:0] host_wdata = '0, host_rdata, m_data;
  logic              m_valid, m_ready = 1, m_last, dac_load;
  logic [GTH_W-1:0]  gth [K];
  logic [LTH_W-1:0]  lth [N];
  logic [CNT_W-1:0]  live_count [N];
  logic [TS_W-1:0]   timestamp;

  fpga_daq #(.DEFAULT_PERIOD(PERIOD)) dut (
    .clk, .rst, .fpga_id(4'd1), .samples, .host_wr, .host_addr, .host_wdata, .host_rdata,
    .m_valid, .m_ready, .m_data, .m_last, .gth, .lth, .dac_load, .live_count, .timestamp
  );

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 30) $display("FAIL %s at %0t", what, $time); end
  endfunction

  // discriminator model, one per strip, time in ns
  real  mean_ns = 1e9;      // mean spacing of arrivals
  bit   periodic = 0;
  real  next_arrival [N];
  int   high_left [N];
  int   dead_left [N];
  longint unsigned emitted [N];
  longint unsigned now_ns = 0;
  int   lost = 0;

  function automatic real exp_spacing();
    real u;
    u = (real'($urandom_range(1_000_000)) + 1.0) / 1_000_001.0;
    return -mean_ns * $ln(u);
  endfunction

  function automatic logic [R-1:0] next_word(int c);
    logic [R-1:0] w;
    for (int i = 0; i < R; i++) begin
      real t;
      t = real'(now_ns + longint'(i));
      if (real'(now_ns + longint'(i)) >= next_arrival[c]) begin
        if (dead_left[c] == 0) begin
          high_left[c] = 4 + $urandom_range(5);
          dead_left[c] = 10;
          emitted[c]++;
        end else lost++;
        next_arrival[c] = periodic ? next_arrival[c] + 10.0 : t + exp_spacing();
      end
      w[i] = (high_left[c] > 0);
      if (high_left[c] > 0) high_left[c]--;
      if (dead_left[c] > 0) dead_left[c]--;
    end
    return w;
  endfunction

  // drive a word per strip each clock; count what is emitted while running
  bit running = 0;
  longint unsigned ref_cnt [N];
  always @(negedge clk) begin
    for (int c = 0; c < N; c++) begin
      longint unsigned before_n;
      before_n = emitted[c];
      samples[c] = next_word(c);
      if (running) ref_cnt[c] += emitted[c] - before_n;
    end
    now_ns += R;
  end

  // a snapshot at edge e captures the words driven before the previous edge;
  // ref_cnt is updated at the negedge, so at a posedge it holds exactly the
  // words already counted plus the one being counted now: keep one-cycle delay
  longint unsigned ref_prev [N];
  typedef struct { longint unsigned cnt [N]; } snap_t;
  snap_t exp_q[$];
  always @(posedge clk) begin
    if (dut.snap_req) begin
      snap_t s;
      for (int c = 0; c < N; c++) s.cnt[c] = ref_prev[c];
      exp_q.push_back(s);
    end
    for (int c = 0; c < N; c++) ref_prev[c] = ref_cnt[c];
  end

  // record receiver
  logic [WORD_W-1:0] rx [NWORDS];
  int widx = 0, records = 0;
  longint unsigned last_cnt [N];
  longint unsigned last_ts = 0;
  real measured_rate = 0.0;
  always @(posedge clk) begin
    if (m_valid && m_ready) begin
      rx[widx] = m_data;
      widx++;
      if (widx == NWORDS) begin
        snap_t s;
        longint unsigned tot, ts;
        widx = 0;
        records++;
        s = exp_q.pop_front();
        tot = 0;
        ts = {rx[3], rx[4]};
        for (int c = 0; c < N; c++) begin
          check(rx[5 + c] == WORD_W'(s.cnt[c]),
                $sformatf("ch %0d count %0d, discriminator emitted %0d", c, rx[5 + c], s.cnt[c]));
          tot += longint'(rx[5 + c]) - last_cnt[c];
          last_cnt[c] = rx[5 + c];
        end
        measured_rate = real'(tot) / real'(N) / (real'(ts - last_ts) * 10e-9);
        last_ts = ts;
      end
    end
  end

  task automatic host_write(logic [ADDR_W-1:0] a, logic [WORD_W-1:0] d);
    @(negedge clk);
    host_wr = 1; host_addr = a; host_wdata = d;
    @(posedge clk); #1;
    host_wr = 0;
  endtask

  // run one rate: start with clear, take three readings, stop
  task automatic run_rate(real rate_hz, bit per, string name);
    real expect_rate, lo, hi;
    int r0;
    mean_ns = 1e9 / rate_hz;
    periodic = per;
    for (int c = 0; c < N; c++) begin
      next_arrival[c] = per ? real'(now_ns) + 20.0 + real'(c % 10) : real'(now_ns) + exp_spacing();
      last_cnt[c] = 0;
    end
    last_ts = 0;
    r0 = records;
    host_write(REG_CTRL, 32'h3);          // run + clear
    @(posedge clk); #1;                   // the clear pulse takes effect here
    running = 1;                          // counting from the next word on
    for (int c = 0; c < N; c++) begin ref_cnt[c] = 0; ref_prev[c] = 0; end
    repeat (3 * PERIOD + 200) @(posedge clk);
    host_write(REG_CTRL, 32'h0);
    running = 0;
    repeat (200) @(posedge clk);
    check(records - r0 == 3, $sformatf("%s: three records", name));
    // lost arrivals make the emitted rate r/(1+r*10ns) for the random case
    expect_rate = per ? 1e8 : rate_hz / (1.0 + rate_hz * 10e-9);
    lo = expect_rate * (per ? 0.999 : 0.95);
    hi = expect_rate * (per ? 1.001 : 1.05);
    check(measured_rate > lo && measured_rate < hi,
          $sformatf("%s: measured %0.4e pulses/s per strip, expected about %0.4e", name, measured_rate, expect_rate));
    $display("%s: measured %0.4e pulses/s per strip (expected about %0.4e)", name, measured_rate, expect_rate);
  endtask

  initial begin
    for (int c = 0; c < N; c++) begin
      samples[c] = '0; high_left[c] = 0; dead_left[c] = 0; emitted[c] = 0;
      ref_cnt[c] = 0; ref_prev[c] = 0; last_cnt[c] = 0; next_arrival[c] = 1e18;
    end
    repeat (4) @(posedge clk);
    #1 rst = 0;
    run_rate(4.86e6, 0, "1e8 p/(cm2 s)");
    run_rate(2.43e7, 0, "5e8 p/(cm2 s)");
    run_rate(1.0e8,  1, "100 MHz periodic");
    check(exp_q.size() == 0, "all snapshots delivered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (3 * (3 * PERIOD + 600) + 1000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
