// config_regs: host-visible settings of one FPGA.
//
// The PC program controls the FPGAs and sets the discriminator thresholds
// through FPGA outputs: a global threshold per front-end chip (onboard DAC)
// and a fine-tuning threshold per channel (DAC inside the chip). This
// register file holds those settings together with the run control and the
// readout period, and signals the DAC driver when a threshold changed.
//
// Register map (word addresses, see daq_pkg):
//   0x00 CTRL    [0] run, [1] clear: writing 1 gives a one-cycle clear pulse
//   0x01 PERIOD  readout period in clock cycles
//   0x02 STATUS  read only: records dropped because the packer was busy
//   0x10+k       global threshold of chip k (GTH_W bits), k < N_CHIP
//   0x40+c       local threshold of channel c (LTH_W bits), c < N_CH
// Unmapped addresses read 0 and ignore writes.
//
// Interface: a simple synchronous write port (`wr_en`, `addr`, `wdata`) and a
// combinational read port (`addr` -> `rdata`), as a command decoder behind
// the Ethernet link would use. `dac_load` pulses one clock after any
// threshold write, when the new value is on the outputs.
//
// Following the paper: host-set global per-chip and local per-channel
// thresholds. Own choices: the register map, widths and reset values
// (run off, period 1 ms, thresholds 0).
module config_regs #(
  parameter int unsigned N_CH   = daq_pkg::N_CH_PER_FPGA,
  parameter int unsigned N_CHIP = daq_pkg::N_CHIP_PER_FPGA,
  parameter int unsigned GTH_W  = daq_pkg::GTH_W,
  parameter int unsigned LTH_W  = daq_pkg::LTH_W,
  parameter int unsigned DEFAULT_PERIOD = daq_pkg::DEFAULT_PERIOD
) (
  input  logic                       clk,
  input  logic                       rst,
  input  logic                       wr_en,
  input  logic [daq_pkg::ADDR_W-1:0] addr,
  input  logic [daq_pkg::WORD_W-1:0] wdata,
  output logic [daq_pkg::WORD_W-1:0] rdata,
  input  logic [daq_pkg::WORD_W-1:0] overruns,
  output logic                       run,
  output logic                       clear,
  output logic [daq_pkg::WORD_W-1:0] period,
  output logic [GTH_W-1:0]           gth [N_CHIP],
  output logic [LTH_W-1:0]           lth [N_CH],
  output logic                       dac_load
);
  import daq_pkg::*;

  // address decode: one select line per threshold register
  logic [N_CHIP-1:0] sel_gth;
  logic [N_CH-1:0]   sel_lth;
  always_comb begin
    for (int k = 0; k < N_CHIP; k++) sel_gth[k] = (addr == REG_GTH0 + ADDR_W'(k));
    for (int c = 0; c < N_CH; c++)   sel_lth[c] = (addr == REG_LTH0 + ADDR_W'(c));
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      run      <= 1'b0;
      clear    <= 1'b0;
      period   <= WORD_W'(DEFAULT_PERIOD);
      dac_load <= 1'b0;
      for (int k = 0; k < N_CHIP; k++) gth[k] <= '0;
      for (int c = 0; c < N_CH; c++)   lth[c] <= '0;
    end else begin
      clear    <= 1'b0;
      dac_load <= 1'b0;
      if (wr_en) begin
        if (addr == REG_CTRL) begin
          ctrl_t c;
          c     = ctrl_t'(wdata[1:0]);
          run   <= c.run;
          clear <= c.clear;
        end
        if (addr == REG_PERIOD) period <= wdata;
        for (int k = 0; k < N_CHIP; k++)
          if (sel_gth[k]) gth[k] <= wdata[GTH_W-1:0];
        for (int c = 0; c < N_CH; c++)
          if (sel_lth[c]) lth[c] <= wdata[LTH_W-1:0];
        if ((|sel_gth) || (|sel_lth)) dac_load <= 1'b1;
      end
    end
  end

  always_comb begin
    rdata = '0;
    if (addr == REG_CTRL)   rdata = WORD_W'({1'b0, run});
    if (addr == REG_PERIOD) rdata = period;
    if (addr == REG_STATUS) rdata = overruns;
    for (int k = 0; k < N_CHIP; k++)
      if (sel_gth[k]) rdata = WORD_W'(gth[k]);
    for (int c = 0; c < N_CH; c++)
      if (sel_lth[c]) rdata = WORD_W'(lth[c]);
  end

endmodule
