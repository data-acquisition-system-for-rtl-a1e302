// readout_timer: periodic snapshot request for the online rate display.
//
// While `run` is high the timer counts clock cycles and raises `tick` for one
// cycle every `period` cycles (the first tick comes `period` cycles after run
// goes high or after `clear`). A period of 0 disables the ticks. The counting
// rate per strip follows as the difference of two readings over the period.
//
// Interface: `period` in 100 MHz cycles, e.g. 100 000 for 1 ms.
// Timing: tick in cycles p, 2p, 3p ... counted from the first running cycle.
//
// Following the paper: the host shows the counting rate of every strip
// online, which needs regular readings. Own choices: a programmable period
// counted in core clock cycles, and the tick semantics above.
module readout_timer #(
  parameter int unsigned PERIOD_W = daq_pkg::WORD_W
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                run,
  input  logic                clear,
  input  logic [PERIOD_W-1:0] period,
  output logic                tick
);

  logic [PERIOD_W-1:0] cnt;  // cycles elapsed in the current period

  always_ff @(posedge clk) begin
    if (rst || clear || !run) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (period == '0) begin
      cnt  <= '0;
      tick <= 1'b0;
    end else if (cnt >= period - 1'b1) begin
      cnt  <= '0;
      tick <= 1'b1;
    end else begin
      cnt  <= cnt + 1'b1;
      tick <= 1'b0;
    end
  end

endmodule
