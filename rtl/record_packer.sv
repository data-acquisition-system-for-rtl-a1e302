// record_packer: turns periodic readings into data records for the PC.
//
// For every readout tick the packer asks the counter bank for a snapshot and
// then streams one record of 32-bit words towards the Ethernet side. A record
// holds what the PC stores for offline analysis: a timestamp, the raw
// integral count of every strip and the thresholds in use.
//
// Record layout (word index : content), N_CH counts, N_CHIP chips:
//   0            {16'hCA7C, fpga_id[3:0], 4'h0, N_CH[7:0]}
//   1            sequence number of the record
//   2            overruns: ticks dropped before this record's snapshot
//                because a record was still pending
//   3            timestamp[TS_W-1:32]   (timestamp in 10 ns ticks)
//   4            timestamp[31:0]
//   5 ..         count of channel 0 .. N_CH-1
//   then         global threshold of chip 0 .. N_CHIP-1, one per word
//   then         local thresholds, 32/LTH_W per word, channel 0 in the
//                lowest bits
// `m_last` marks the final word.
//
// Flow control: valid/ready. A word is taken in a cycle where `m_valid` and
// `m_ready` are both high; `m_data` and `m_last` hold while `m_valid` is high
// and `m_ready` low. A tick that arrives while a record is pending is not
// turned into a snapshot (the counters keep counting, so no pulse is lost:
// the next record simply covers a longer interval) and the overrun count
// goes up by one.
//
// Timing: tick in cycle t -> `snap_req` in cycle t -> `snap_valid` in t+1 ->
// first word valid in t+2; with `m_ready` held high a record takes
// RECORD_WORDS cycles.
//
// Following the paper: timestamp, raw integral counts and thresholds are
// the stored data. Thresholds and the overrun count are copied when the
// snapshot is taken, so a record is self-consistent. Own choices: everything about the format and the flow
// control, and the overrun policy.
module record_packer #(
  parameter int unsigned N_CH   = daq_pkg::N_CH_PER_FPGA,
  parameter int unsigned N_CHIP = daq_pkg::N_CHIP_PER_FPGA,
  parameter int unsigned CNT_W  = daq_pkg::CNT_W,
  parameter int unsigned TS_W   = daq_pkg::TS_W,
  parameter int unsigned GTH_W  = daq_pkg::GTH_W,
  parameter int unsigned LTH_W  = daq_pkg::LTH_W
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [3:0]                 fpga_id,
  input  logic                       tick,
  output logic                       snap_req,
  input  logic                       snap_valid,
  input  logic [CNT_W-1:0]           snap_count [N_CH],
  input  logic [TS_W-1:0]            snap_ts,
  input  logic [GTH_W-1:0]           gth [N_CHIP],
  input  logic [LTH_W-1:0]           lth [N_CH],
  output logic [daq_pkg::WORD_W-1:0] overruns,
  output logic                       busy,
  output logic                       m_valid,
  input  logic                       m_ready,
  output logic [daq_pkg::WORD_W-1:0] m_data,
  output logic                       m_last
);
  import daq_pkg::*;

  localparam int unsigned HDR_WORDS    = 5;
  localparam int unsigned LTH_PER_WORD = WORD_W / LTH_W;
  localparam int unsigned LTH_WORDS    = (N_CH + LTH_PER_WORD - 1) / LTH_PER_WORD;
  localparam int unsigned CNT_BASE     = HDR_WORDS;
  localparam int unsigned GTH_BASE     = CNT_BASE + N_CH;
  localparam int unsigned LTH_BASE     = GTH_BASE + N_CHIP;
  localparam int unsigned RECORD_WORDS = LTH_BASE + LTH_WORDS;
  localparam int unsigned IDX_W        = $clog2(RECORD_WORDS);

  typedef enum logic [1:0] {S_IDLE, S_WAIT, S_SEND} state_t;
  state_t state;

  logic [IDX_W-1:0]  idx;
  logic [WORD_W-1:0] seq;
  logic [WORD_W-1:0] ov_l;         // overrun count as of the snapshot
  logic [GTH_W-1:0]  gth_l [N_CHIP]; // thresholds as of the snapshot
  logic [LTH_W-1:0]  lth_l [N_CH];

  assign busy     = (state != S_IDLE);
  assign snap_req = tick && (state == S_IDLE);
  assign m_valid  = (state == S_SEND);
  assign m_last   = m_valid && (idx == IDX_W'(RECORD_WORDS - 1));

  always_ff @(posedge clk) begin
    if (rst) begin
      state    <= S_IDLE;
      idx      <= '0;
      seq      <= '0;
      overruns <= '0;
      ov_l     <= '0;
      for (int k = 0; k < N_CHIP; k++) gth_l[k] <= '0;
      for (int c = 0; c < N_CH; c++)   lth_l[c] <= '0;
    end else begin
      if (tick && state != S_IDLE) overruns <= overruns + 1'b1;
      unique case (state)
        S_IDLE: if (tick) state <= S_WAIT;
        S_WAIT: if (snap_valid) begin
          state <= S_SEND;
          idx   <= '0;
          ov_l  <= overruns;
          gth_l <= gth;
          lth_l <= lth;
        end
        S_SEND: if (m_ready) begin
          if (m_last) begin
            state <= S_IDLE;
            seq   <= seq + 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // word selection
  logic [WORD_W-1:0] lth_word;
  always_comb begin
    int unsigned w;
    w = 0;
    lth_word = '0;
    if (32'(idx) >= LTH_BASE) begin
      w = 32'(idx) - LTH_BASE;
      for (int j = 0; j < LTH_PER_WORD; j++)
        if (w * LTH_PER_WORD + j < N_CH)
          lth_word[j*LTH_W +: LTH_W] = lth_l[w * LTH_PER_WORD + j];
    end
  end

  always_comb begin
    logic [63:0] ts64;
    ts64   = 64'(snap_ts);
    m_data = '0;
    if (32'(idx) == 0)        m_data = {RECORD_MAGIC, fpga_id, 4'h0, 8'(N_CH)};
    else if (32'(idx) == 1)   m_data = seq;
    else if (32'(idx) == 2)   m_data = ov_l;
    else if (32'(idx) == 3)   m_data = ts64[63:32];
    else if (32'(idx) == 4)   m_data = ts64[31:0];
    else if (32'(idx) < GTH_BASE) m_data = WORD_W'(snap_count[32'(idx) - CNT_BASE]);
    else if (32'(idx) < LTH_BASE) m_data = WORD_W'(gth_l[32'(idx) - GTH_BASE]);
    else                      m_data = lth_word;
  end

  // valid/ready rule: a word on offer stays put until it is taken
  property p_hold;
    @(posedge clk) disable iff (rst)
      (m_valid && !m_ready) |=> (m_valid && $stable(m_data) && $stable(m_last));
  endproperty
  a_hold: assert property (p_hold) else $error("record word changed while stalled");

endmodule
