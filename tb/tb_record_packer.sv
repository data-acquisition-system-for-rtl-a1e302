// tb_record_packer: self-checking test of the data record formatter.
//
// The testbench plays the counter bank: it answers each `snap_req` by loading
// fresh random counts and timestamp into the shadow inputs and raising
// `snap_valid` one clock later. Thresholds are random and are changed by the
// testbench while records are being sent, to check that a record carries the
// values from its snapshot. The stream is received with random `m_ready`
// back-pressure; every word is compared with a record built independently
// from the documented layout, words offered while stalled must not change,
// and ticks arriving while a record is pending must be counted as overruns
// and reported in the next record. With `m_ready` high, the first word must
// appear two clocks after the tick and a record must take 67 clocks.
module tb_record_packer;
  import daq_pkg::*;
  localparam int N = 48, K = 2;
  localparam int NWORDS = 5 + N + K + (N + 3) / 4;

  logic clk = 0, rst = 1, tick = 0, snap_req, snap_valid = 0, busy;
  logic [3:0] fpga_id = 4'd2;
  logic [CNT_W-1:0] snap_count [N];
  logic [TS_W-1:0]  snap_ts = '0;
  logic [GTH_W-1:0] gth [K];
  logic [LTH_W-1:0] lth [N];
  logic [WORD_W-1:0] overruns, m_data;
  logic m_valid, m_ready = 1, m_last;

  record_packer #(.N_CH(N), .N_CHIP(K)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s at %0t", what, $time); end
  endtask

  // expected records, built when the snapshot is taken
  logic [WORD_W-1:0] exp_q[$];
  int exp_ov = 0, seq = 0, records = 0, stalls = 0, ov_seen = 0;

  // counter bank model: answer snap_req with new shadow values
  always @(posedge clk) begin
    snap_valid <= snap_req;
    if (snap_req) begin
      logic [TS_W-1:0] ts;
      logic [CNT_W-1:0] cnt [N];
      ts = {$urandom, $urandom};
      foreach (cnt[c]) cnt[c] = $urandom;
      snap_ts <= ts;
      snap_count <= cnt;
      // expected record, first part; the thresholds follow one clock
      // later, when the packer copies them
      exp_q.push_back({16'hCA7C, fpga_id, 4'h0, 8'(N)});
      exp_q.push_back(WORD_W'(seq));
      exp_q.push_back(WORD_W'(exp_ov));
      exp_q.push_back(WORD_W'(64'(ts) >> 32));
      exp_q.push_back(ts[31:0]);
      foreach (cnt[c]) exp_q.push_back(cnt[c]);
      seq++;
    end
  end

  // thresholds: copy at the edge where snap_valid is high
  always @(posedge clk) begin
    if (snap_valid) begin
      logic [WORD_W-1:0] w;
      for (int k = 0; k < K; k++) exp_q.push_back(WORD_W'(gth[k]));
      for (int j = 0; j < (N + 3) / 4; j++) begin
        w = '0;
        for (int i = 0; i < 4; i++)
          if (4*j + i < N) w[8*i +: 8] = lth[4*j + i];
        exp_q.push_back(w);
      end
    end
  end

  // receiver with stall checks
  logic [WORD_W-1:0] held_data;
  logic held = 0;
  int widx = 0;
  always @(posedge clk) begin
    if (!rst) begin
      if (held) begin
        checks++;
        if (!(m_valid && m_data == held_data)) begin
          failures++; $display("FAIL word changed while stalled at %0t", $time);
        end
      end
      held <= m_valid && !m_ready;
      held_data <= m_data;
      if (m_valid && !m_ready) stalls++;
      if (m_valid && m_ready) begin
        logic [WORD_W-1:0] e;
        // header and counts are queued at the snapshot, thresholds one
        // clock later, so the queue holds the record in order
        e = exp_q[widx];
        checks++;
        if (m_data !== e) begin
          failures++;
          if (failures < 20) $display("FAIL word %0d got %h exp %h", widx, m_data, e);
        end
        checks++;
        if (m_last != (widx == NWORDS - 1)) begin failures++; $display("FAIL m_last at word %0d", widx); end
        if (widx == 2 && m_data != 0) ov_seen++;
        widx++;
        if (widx == NWORDS) begin
          widx = 0;
          records++;
          repeat (NWORDS) void'(exp_q.pop_front());
        end
      end
    end
  end

  task automatic new_thresholds();
    foreach (gth[k]) gth[k] = GTH_W'($urandom);
    foreach (lth[c]) lth[c] = LTH_W'($urandom);
  endtask

  initial begin
    int t0, t_first, t_last;
    new_thresholds();
    foreach (snap_count[c]) snap_count[c] = '0;
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // 1) latency and duration with m_ready high
    m_ready = 1;
    @(negedge clk) tick = 1;
    t0 = 0;
    @(negedge clk) tick = 0;
    t_first = -1; t_last = -1;
    for (int i = 1; i < 200; i++) begin
      if (m_valid && t_first < 0) t_first = i;
      if (m_valid && m_last) begin t_last = i; break; end
      @(negedge clk);
    end
    check(t_first == 2, $sformatf("first word %0d clocks after tick", t_first));
    check(t_last - t_first + 1 == NWORDS, $sformatf("record length %0d clocks", t_last - t_first + 1));
    repeat (3) @(negedge clk);
    // 2) random ticks, back-pressure and threshold changes
    for (int n = 0; n < 20000; n++) begin
      m_ready = ($urandom_range(3) != 0);
      tick = ($urandom_range(59) == 0);
      if (tick && busy) exp_ov++;
      if (!snap_valid && !snap_req && $urandom_range(49) == 0) new_thresholds();
      @(negedge clk);
    end
    tick = 0; m_ready = 1;
    repeat (200) @(negedge clk);
    check(records > 50, $sformatf("records sent %0d", records));
    check(stalls > 100, "back-pressure exercised");
    check(ov_seen > 0, "overrun reported in a record");
    check(overruns == WORD_W'(exp_ov), $sformatf("overrun count %0d exp %0d", overruns, exp_ov));
    check(!busy && widx == 0, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
