// digital_delay: fixed digital delay of every NINO channel in the 500 MHz
// sampling domain.
//
// The trigger from the scintillator coincidence reaches the FPGA later than
// the NINO time-over-threshold pulse of the same muon. Delaying the pulses by
// 128 ns (64 samples of 2 ns) places them near the middle of the 260 ns
// trigger window instead of before its start. The delay is a shift register
// of DELAY stages, one per sampling clock; its first two stages also act as
// the synchroniser of the asynchronous LVDS inputs.
//
// Interface: din is sampled on every rising edge of clk. A sample taken on
// edge k is on dout from edge k+DELAY-1 on, so a flop reading dout takes it
// on edge k+DELAY: the delay is DELAY clock periods. There is no reset: the register
// is flushed DELAY cycles after the clock starts, and a shift register
// without reset maps onto FPGA memory. The 128 ns value is the published
// one; realising it as a plain shift register is this design's choice.
module digital_delay #(
  parameter int unsigned CHANNELS = daq_pkg::DEF_CHANNELS,
  parameter int unsigned DELAY    = daq_pkg::DEF_DELAY_SAMPLES
) (
  input  logic                clk,
  input  logic [CHANNELS-1:0] din,
  output logic [CHANNELS-1:0] dout
);
  logic [CHANNELS-1:0] stage [DELAY];

  always_ff @(posedge clk) begin
    stage[0] <= din;
    for (int i = 1; i < int'(DELAY); i++) stage[i] <= stage[i-1];
  end

  assign dout = stage[DELAY-1];

  initial begin
    assert (DELAY >= 2) else $error("digital_delay: DELAY must be at least 2 (synchroniser)");
  end
endmodule
