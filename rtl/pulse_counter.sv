// pulse_counter: raw integral pulse count of one detector strip.
//
// The discriminator output of a strip is sampled at 1 GHz by the FPGA input
// deserializer, which delivers SER_RATIO samples per 100 MHz clock. This
// module counts discriminator pulses as 0->1 transitions of that sample
// stream. The last sample of each word is kept, so a pulse whose leading edge
// falls between two words is counted exactly once, and a pulse that stays
// high across several words is counted once. Several pulses inside one word
// are all counted (a word of 10 samples can hold up to 5 leading edges).
//
// Interface: `samples` is one word per clock, bit 0 the earliest sample.
// `en` gates counting (samples are still tracked so no edge is invented
// when counting resumes); `clear` zeroes the count.
// `count` is the running total, `hits` the leading edges found in the
// current word (combinational, for use by any per-word logic).
//
// Timing: `count` includes a word one clock after that word is presented.
//
// Following the paper: pulse counting per strip in the FPGA from 1 GHz
// samples on a 100 MHz clock. Own choices: edge (not level) counting, a
// wrapping counter of CNT_W bits (the host takes differences of successive
// readings), synchronous active-high reset.
module pulse_counter #(
  parameter int unsigned SER_RATIO = daq_pkg::SER_RATIO,
  parameter int unsigned CNT_W     = daq_pkg::CNT_W
) (
  input  logic                 clk,
  input  logic                 rst,
  input  logic                 en,
  input  logic                 clear,
  input  logic [SER_RATIO-1:0] samples,
  output logic [$clog2(SER_RATIO/2+1)-1:0] hits,
  output logic [CNT_W-1:0]     count
);

  localparam int unsigned HIT_W = $clog2(SER_RATIO/2+1);

  logic                 last_sample;  // newest sample of the previous word
  logic [SER_RATIO-1:0] prev;         // each sample's predecessor
  logic [SER_RATIO-1:0] rise;

  always_comb begin
    prev = {samples[SER_RATIO-2:0], last_sample};
    rise = samples & ~prev;
    hits = '0;
    for (int i = 0; i < SER_RATIO; i++)
      hits = hits + HIT_W'(rise[i]);
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      last_sample <= 1'b0;
      count       <= '0;
    end else begin
      // the edge history keeps running through `clear`, so a line that is
      // high while the count is cleared does not yield a false edge
      last_sample <= samples[SER_RATIO-1];
      if (clear)
        count <= '0;
      else if (en)
        count <= count + CNT_W'(hits);
    end
  end

endmodule
