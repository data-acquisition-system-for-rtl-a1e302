// fpga_daq: counting firmware of one readout FPGA (48 strips).
//
// Each of the three FPGAs receives the discriminator outputs of two 24-channel
// front-end chips as LVDS lines, samples them at 1 GHz with its input
// deserializers and handles them on a 100 MHz core clock. This module is the
// logic behind the deserializers:
//   counter_bank   48 edge-counting pulse counters, a timestamp, snapshot
//   readout_timer  periodic readout tick
//   record_packer  one record per tick: timestamp, counts, thresholds
//   config_regs    run/clear, period and threshold registers for the host
// The deserializers, the Ethernet MAC/PHY with its command decoder, and the
// threshold DAC drivers sit outside: their signals are this module's ports.
//
// Interface: `samples[c]` one 10-sample word per strip and clock (bit 0
// earliest). Host register port `host_wr/host_addr/host_wdata/host_rdata`
// (see config_regs). Record stream `m_valid/m_ready/m_data/m_last` (see
// record_packer). Threshold settings `gth`, `lth` with `dac_load`.
//
// Timing: after CTRL.run is written, the first record starts PERIOD + 3
// cycles later; a record is 67 words at the default sizes.
//
// Following the paper: 48 channels per FPGA, 100 MHz clock, 1 GHz sampling,
// host control of thresholds, recording of timestamp, counts and thresholds.
// Own choices: the partitioning into the sub-blocks above and their formats.
module fpga_daq #(
  parameter int unsigned N_CH      = daq_pkg::N_CH_PER_FPGA,
  parameter int unsigned N_CHIP    = daq_pkg::N_CHIP_PER_FPGA,
  parameter int unsigned SER_RATIO = daq_pkg::SER_RATIO,
  parameter int unsigned CNT_W     = daq_pkg::CNT_W,
  parameter int unsigned TS_W      = daq_pkg::TS_W,
  parameter int unsigned GTH_W     = daq_pkg::GTH_W,
  parameter int unsigned LTH_W     = daq_pkg::LTH_W,
  parameter int unsigned DEFAULT_PERIOD = daq_pkg::DEFAULT_PERIOD
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [3:0]                 fpga_id,
  input  logic [SER_RATIO-1:0]       samples [N_CH],
  input  logic                       host_wr,
  input  logic [daq_pkg::ADDR_W-1:0] host_addr,
  input  logic [daq_pkg::WORD_W-1:0] host_wdata,
  output logic [daq_pkg::WORD_W-1:0] host_rdata,
  output logic                       m_valid,
  input  logic                       m_ready,
  output logic [daq_pkg::WORD_W-1:0] m_data,
  output logic                       m_last,
  output logic [GTH_W-1:0]           gth [N_CHIP],
  output logic [LTH_W-1:0]           lth [N_CH],
  output logic                       dac_load,
  output logic [CNT_W-1:0]           live_count [N_CH],
  output logic [TS_W-1:0]            timestamp
);
  import daq_pkg::*;

  logic              run, clear, tick, snap_req, snap_valid;
  logic [WORD_W-1:0] period, overruns;
  logic [CNT_W-1:0]  snap_count [N_CH];
  logic [TS_W-1:0]   snap_ts;

  config_regs #(
    .N_CH(N_CH), .N_CHIP(N_CHIP), .GTH_W(GTH_W), .LTH_W(LTH_W),
    .DEFAULT_PERIOD(DEFAULT_PERIOD)
  ) u_regs (
    .clk, .rst,
    .wr_en(host_wr), .addr(host_addr), .wdata(host_wdata), .rdata(host_rdata),
    .overruns, .run, .clear, .period, .gth, .lth, .dac_load
  );

  readout_timer #(.PERIOD_W(WORD_W)) u_timer (
    .clk, .rst, .run, .clear, .period, .tick
  );

  counter_bank #(
    .N_CH(N_CH), .SER_RATIO(SER_RATIO), .CNT_W(CNT_W), .TS_W(TS_W)
  ) u_bank (
    .clk, .rst, .run, .clear, .snap(snap_req), .samples,
    .live_count, .snap_count, .timestamp, .snap_ts, .snap_valid
  );

  record_packer #(
    .N_CH(N_CH), .N_CHIP(N_CHIP), .CNT_W(CNT_W), .TS_W(TS_W),
    .GTH_W(GTH_W), .LTH_W(LTH_W)
  ) u_pack (
    .clk, .rst, .fpga_id, .tick, .snap_req, .snap_valid,
    .snap_count, .snap_ts, .gth, .lth, .overruns, .busy(),
    .m_valid, .m_ready, .m_data, .m_last
  );

endmodule
