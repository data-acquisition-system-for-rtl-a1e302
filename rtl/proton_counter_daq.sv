// proton_counter_daq: digital readout of the 146-strip proton counter.
//
// The silicon sensor has 146 strips; two go to analog debug outputs and 144
// are read by six 24-channel discriminator chips. Their digital outputs are
// split over three FPGAs, 48 strips (two chips) each, that count the
// discriminator pulses and send periodic records to a PC over one Gigabit
// Ethernet link per FPGA. This top holds the three FPGA counting units side
// by side; they share nothing but the clock and reset, as separate FPGAs
// with a common 100 MHz reference would.
//
// Interface (all arrays indexed by global position, f = FPGA):
//   samples[s]          deserialized 10-sample word of counted strip s, with
//                       strips 48f .. 48f+47 on FPGA f
//   host_*[f]           register port of FPGA f (command side of its link)
//   m_*[f]              record stream of FPGA f (data side of its link)
//   gth[2f+k], lth[s]   threshold codes for the DAC drivers, dac_load[f]
// Timing: see fpga_daq; the three units run in lockstep but are
// independently controlled.
//
// Following the paper: three FPGAs, 144 counted strips, 100 MHz clock and
// 1 GHz sampling. Own choices: strips assigned to FPGAs in consecutive
// blocks of 48 and the FPGA id equal to the unit index.
module proton_counter_daq #(
  parameter int unsigned N_FPGA    = daq_pkg::N_FPGA,
  parameter int unsigned N_CH      = daq_pkg::N_CH_PER_FPGA,
  parameter int unsigned N_CHIP    = daq_pkg::N_CHIP_PER_FPGA,
  parameter int unsigned SER_RATIO = daq_pkg::SER_RATIO,
  parameter int unsigned DEFAULT_PERIOD = daq_pkg::DEFAULT_PERIOD
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic [SER_RATIO-1:0]       samples    [N_FPGA*N_CH],
  input  logic                       host_wr    [N_FPGA],
  input  logic [daq_pkg::ADDR_W-1:0] host_addr  [N_FPGA],
  input  logic [daq_pkg::WORD_W-1:0] host_wdata [N_FPGA],
  output logic [daq_pkg::WORD_W-1:0] host_rdata [N_FPGA],
  output logic                       m_valid    [N_FPGA],
  input  logic                       m_ready    [N_FPGA],
  output logic [daq_pkg::WORD_W-1:0] m_data     [N_FPGA],
  output logic                       m_last     [N_FPGA],
  output logic [daq_pkg::GTH_W-1:0]  gth        [N_FPGA*N_CHIP],
  output logic [daq_pkg::LTH_W-1:0]  lth        [N_FPGA*N_CH],
  output logic                       dac_load   [N_FPGA]
);
  import daq_pkg::*;

  for (genvar f = 0; f < N_FPGA; f++) begin : g_fpga
    logic [SER_RATIO-1:0] s_f   [N_CH];
    logic [GTH_W-1:0]     gth_f [N_CHIP];
    logic [LTH_W-1:0]     lth_f [N_CH];
    logic [CNT_W-1:0]     live_unused [N_CH];
    logic [TS_W-1:0]      ts_unused;

    for (genvar c = 0; c < N_CH; c++) begin : g_ch
      assign s_f[c]          = samples[f*N_CH + c];
      assign lth[f*N_CH + c] = lth_f[c];
    end
    for (genvar k = 0; k < N_CHIP; k++) begin : g_chip
      assign gth[f*N_CHIP + k] = gth_f[k];
    end

    fpga_daq #(
      .N_CH(N_CH), .N_CHIP(N_CHIP), .SER_RATIO(SER_RATIO),
      .DEFAULT_PERIOD(DEFAULT_PERIOD)
    ) u_fpga (
      .clk, .rst,
      .fpga_id(4'(f)),
      .samples(s_f),
      .host_wr(host_wr[f]), .host_addr(host_addr[f]),
      .host_wdata(host_wdata[f]), .host_rdata(host_rdata[f]),
      .m_valid(m_valid[f]), .m_ready(m_ready[f]),
      .m_data(m_data[f]), .m_last(m_last[f]),
      .gth(gth_f), .lth(lth_f), .dac_load(dac_load[f]),
      .live_count(live_unused), .timestamp(ts_unused)
    );
  end

endmodule
