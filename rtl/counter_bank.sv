// counter_bank: the pulse counters of one FPGA, a timestamp, and a
// consistent snapshot of both.
//
// One pulse_counter per strip (48 per FPGA) accumulates the raw integral
// count. A free-running timestamp counts 100 MHz clock cycles (10 ns ticks)
// while `run` is high. A one-cycle `snap` request copies every count and the
// timestamp into a shadow set in the same clock edge, so all strips of a
// reading cover exactly the same time interval while counting goes on
// undisturbed. `snap_valid` pulses one clock after `snap`, when the shadow set
// holds the new values; it stays valid until the next snapshot.
//
// Interface: `samples[c]` is the deserialized word of strip c (bit 0 the
// earliest 1 ns sample). `clear` zeroes counters and timestamp.
//
// Timing: a word presented in cycle t is in the live count at t+1; a `snap`
// in cycle t captures all words up to cycle t-1 and the timestamp value of
// cycle t.
//
// Following the paper: per-strip counting of 48 channels per FPGA, a
// timestamp and raw integral counts as the recorded data. Own choices: the
// shadow-register snapshot and the timestamp width.
module counter_bank #(
  parameter int unsigned N_CH      = daq_pkg::N_CH_PER_FPGA,
  parameter int unsigned SER_RATIO = daq_pkg::SER_RATIO,
  parameter int unsigned CNT_W     = daq_pkg::CNT_W,
  parameter int unsigned TS_W      = daq_pkg::TS_W
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 run,
  input  logic                 clear,
  input  logic                 snap,
  input  logic [SER_RATIO-1:0] samples   [N_CH],
  output logic [CNT_W-1:0]     live_count[N_CH],
  output logic [CNT_W-1:0]     snap_count[N_CH],
  output logic [TS_W-1:0]      timestamp,
  output logic [TS_W-1:0]      snap_ts,
  output logic                 snap_valid
);

  localparam int unsigned HIT_W = $clog2(SER_RATIO/2+1);

  for (genvar c = 0; c < N_CH; c++) begin : g_ch
    logic [HIT_W-1:0] hits_unused;
    pulse_counter #(.SER_RATIO(SER_RATIO), .CNT_W(CNT_W)) u_cnt (
      .clk, .rst, .en(run), .clear,
      .samples(samples[c]),
      .hits(hits_unused),
      .count(live_count[c])
    );
  end

  always_ff @(posedge clk) begin
    if (rst || clear)
      timestamp <= '0;
    else if (run)
      timestamp <= timestamp + 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      snap_valid <= 1'b0;
      snap_ts    <= '0;
      for (int c = 0; c < N_CH; c++) snap_count[c] <= '0;
    end else begin
      snap_valid <= snap;
      if (snap) begin
        snap_ts <= timestamp;
        for (int c = 0; c < N_CH; c++) snap_count[c] <= live_count[c];
      end
    end
  end

endmodule
