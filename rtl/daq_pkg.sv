// daq_pkg: constants and types shared by the counting firmware of the
// proton-counter data acquisition.
//
// The detector is a 146-strip silicon sensor read by six 24-channel
// discriminator chips; 144 strips reach three FPGAs, 48 strips each. Every
// FPGA runs a 100 MHz core clock and samples each discriminator line at
// 1 GHz, so one core cycle carries SER_RATIO = 10 samples per strip. These
// numbers follow the paper. Counter, timestamp and threshold widths, the
// register map and the record layout below are this design's own choices.
package daq_pkg;

  // ---- sizes taken from the detector description ----
  localparam int unsigned SER_RATIO     = 10;  // 1 GHz samples per 100 MHz clock
  localparam int unsigned N_FPGA        = 3;   // FPGAs in the system
  localparam int unsigned N_CH_PER_FPGA = 48;  // 144 counted strips / 3 FPGAs
  localparam int unsigned N_CH_PER_CHIP = 24;  // discriminator channels per chip
  localparam int unsigned N_CHIP_PER_FPGA = N_CH_PER_FPGA / N_CH_PER_CHIP; // 2

  // ---- widths chosen by this design ----
  localparam int unsigned CNT_W = 32;  // raw integral count per strip (wraps)
  localparam int unsigned TS_W  = 48;  // timestamp in 10 ns ticks
  localparam int unsigned GTH_W = 16;  // global threshold DAC code (per chip)
  localparam int unsigned LTH_W = 8;   // local threshold DAC code (per channel)
  localparam int unsigned ADDR_W = 8;  // host register address
  localparam int unsigned WORD_W = 32; // register and record word

  // default readout period: 1 ms at 100 MHz
  localparam int unsigned DEFAULT_PERIOD = 100_000;

  // ---- host register map (word addresses) ----
  localparam logic [ADDR_W-1:0] REG_CTRL    = 8'h00; // [0] run, [1] clear (self-clearing)
  localparam logic [ADDR_W-1:0] REG_PERIOD  = 8'h01; // readout period in clock cycles
  localparam logic [ADDR_W-1:0] REG_STATUS  = 8'h02; // read only: overrun count
  localparam logic [ADDR_W-1:0] REG_GTH0    = 8'h10; // global thresholds, one per chip
  localparam logic [ADDR_W-1:0] REG_LTH0    = 8'h40; // local thresholds, one per channel

  // first word of every data record
  localparam logic [15:0] RECORD_MAGIC = 16'hCA7C;

  // control register fields
  typedef struct packed {
    logic clear;   // bit 1: zero counters and timestamp (pulse)
    logic run;     // bit 0: counting and periodic readout enabled
  } ctrl_t;

endpackage
