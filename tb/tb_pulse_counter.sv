// tb_pulse_counter: self-checking test of the per-strip pulse counter.
//
// A pulse source at 1 ns resolution (random widths 1..15 ns, random gaps
// 1..30 ns, plus directed words with five pulses, with pulses that straddle
// word boundaries and a line held high for many words) is cut into 10-sample
// words. The reference count is taken by walking the serial stream sample by
// sample, independently of the word-level logic in the design. The count is
// compared every cycle, including across `en` low and `clear`.
module tb_pulse_counter;
  localparam int R = 10;
  localparam int W = 32;

  logic clk = 0, rst = 1, en = 0, clear = 0;
  logic [R-1:0] samples = '0;
  logic [$clog2(R/2+1)-1:0] hits;
  logic [W-1:0] count;

  pulse_counter #(.SER_RATIO(R), .CNT_W(W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  longint unsigned ref_count = 0;
  logic ref_last = 0;

  // serial pulse source
  int level_left = 0;  // samples left at the current level
  logic level = 0;
  function automatic logic [R-1:0] next_word();
    logic [R-1:0] w;
    for (int i = 0; i < R; i++) begin
      if (level_left == 0) begin
        level      = ~level;
        level_left = level ? 1 + $urandom_range(14) : 1 + $urandom_range(29);
      end
      w[i] = level;
      level_left--;
    end
    return w;
  endfunction

  // reference: rising edges found by walking samples one by one
  function automatic int serial_edges(logic [R-1:0] w, logic last);
    int n = 0;
    logic p = last;
    for (int i = 0; i < R; i++) begin
      if (w[i] && !p) n++;
      p = w[i];
    end
    return n;
  endfunction

  task automatic step(logic [R-1:0] w, logic e, logic c);
    int e_n;
    samples = w; en = e; clear = c;
    e_n = serial_edges(w, ref_last);
    #1;
    checks++;
    if (int'(hits) != e_n) begin
      failures++;
      $display("FAIL hits word=%b last=%0d got %0d exp %0d", w, ref_last, hits, e_n);
    end
    @(posedge clk);
    #2;
    if (c) ref_count = 0;
    else if (e) ref_count += e_n;
    ref_last = w[R-1];
    checks++;
    if (count != W'(ref_count)) begin
      failures++;
      $display("FAIL count got %0d exp %0d", count, ref_count);
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    #1 rst = 0;
    // directed: five pulses in one word, 1 ns apart
    step(10'b1010101010, 1, 0);
    step(10'b0101010101, 1, 0);      // edge at sample 0 after a high last sample: none there
    step(10'b1000000000, 1, 0);      // rising at the last sample
    step(10'b1111111111, 1, 0);      // still high: no new pulse
    step(10'b0000000001, 1, 0);      // falls, rises at sample 0
    step(10'b1111111111, 1, 0);
    step(10'b0000000000, 1, 0);
    // random stream
    for (int n = 0; n < 4000; n++) begin
      logic e, c;
      e = ($urandom_range(9) != 0);
      c = ($urandom_range(499) == 0);
      step(next_word(), e, c);
    end
    // clear while the line is high must not yield a false edge afterwards
    step(10'b1111111111, 1, 0);
    step(10'b1111111111, 1, 1);
    step(10'b1111111111, 1, 0);
    checks++;
    if (count != 0) begin failures++; $display("FAIL false edge after clear"); end
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
