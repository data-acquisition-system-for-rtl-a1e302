// tb_counter_bank: self-checking test of the 48-strip counter bank.
//
// Every strip gets its own random pulse stream (1 ns samples, cut into
// 10-sample words). A reference model keeps, per strip, the number of rising
// edges found sample by sample, and a cycle count for the timestamp. Random
// snapshot requests check that the shadow set equals the reference at the
// request cycle for all strips at once, that `snap_valid` comes one clock
// later, and that the shadow set then stays put while counting continues.
// `run` low must freeze counts and timestamp; `clear` must zero both.
module tb_counter_bank;
  localparam int N = 48, R = 10, W = 32, T = 48;

  logic clk = 0, rst = 1, run = 0, clear = 0, snap = 0;
  logic [R-1:0] samples   [N];
  logic [W-1:0] live_count[N];
  logic [W-1:0] snap_count[N];
  logic [T-1:0] timestamp, snap_ts;
  logic snap_valid;

  counter_bank #(.N_CH(N), .SER_RATIO(R), .CNT_W(W), .TS_W(T)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned ref_cnt [N];
  logic            ref_last[N];
  longint unsigned ref_ts = 0;
  longint unsigned exp_snap[N];
  longint unsigned exp_ts;
  int              level_left[N];
  logic            level[N];
  int              snaps = 0;

  function automatic logic [R-1:0] next_word(int c);
    logic [R-1:0] w;
    for (int i = 0; i < R; i++) begin
      if (level_left[c] == 0) begin
        level[c]      = ~level[c];
        level_left[c] = level[c] ? 1 + $urandom_range(9) : 1 + $urandom_range(40);
      end
      w[i] = level[c];
      level_left[c]--;
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

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s at %0t", what, $time);
    end
  endtask

  initial begin
    for (int c = 0; c < N; c++) begin
      samples[c] = '0; ref_cnt[c] = 0; ref_last[c] = 0;
      level_left[c] = 1 + c; level[c] = 0; exp_snap[c] = 0;
    end
    repeat (3) @(posedge clk);
    #1 rst = 0;
    for (int n = 0; n < 3000; n++) begin
      logic r, cl, sn;
      r  = (n > 5) && ($urandom_range(19) != 0);
      cl = ($urandom_range(999) == 0);
      sn = ($urandom_range(29) == 0);
      run = r; clear = cl; snap = sn;
      for (int c = 0; c < N; c++) samples[c] = next_word(c);
      if (sn) begin
        for (int c = 0; c < N; c++) exp_snap[c] = ref_cnt[c];
        exp_ts = ref_ts;
      end
      @(posedge clk);
      #1;
      // reference update for this edge
      for (int c = 0; c < N; c++) begin
        if (cl) ref_cnt[c] = 0;
        else if (r) ref_cnt[c] += serial_edges(samples[c], ref_last[c]);
        ref_last[c] = samples[c][R-1];
      end
      if (cl) ref_ts = 0; else if (r) ref_ts++;
      check(snap_valid == sn, "snap_valid timing");
      if (sn) snaps++;
      for (int c = 0; c < N; c++) begin
        check(live_count[c] == W'(ref_cnt[c]), $sformatf("live count ch%0d", c));
        check(snap_count[c] == W'(exp_snap[c]), $sformatf("snap count ch%0d", c));
      end
      check(timestamp == T'(ref_ts), "timestamp");
      if (snaps > 0) check(snap_ts == T'(exp_ts), "snap timestamp");
    end
    check(snaps > 20, "enough snapshots");
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
