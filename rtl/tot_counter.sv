// tot_counter: time-over-threshold of every channel inside a trigger
// window, in the 500 MHz sampling domain.
//
// The NINO encodes the charge of a strip signal as the width of its output
// pulse. For each channel this block counts the consecutive high samples of
// the first pulse seen in the window: counting starts at the first high
// sample and stops at the first low sample after it. A pulse already high at
// the window start is counted from the start; one still high at the end is
// cut at the end. The TOT in ns is tot * 2.
//
// Interface: sample/sample_we/sample_last come from window_fifo, so the
// block sees exactly the samples that are stored. tot and tot_valid are
// updated on the clock edge that takes the last sample of a window;
// tot_valid is then high for one cycle and tot holds the result until the
// next window ends. A channel with no pulse gives 0.
//
// The published design states that the FPGA board derives the TOT by
// counting consecutive high states of each channel in 2 ns steps. Which
// pulse is counted when a channel fires twice, and that the results leave
// the block as parallel outputs rather than in the UART stream, are this
// design's choices.
module tot_counter #(
  parameter int unsigned CHANNELS       = daq_pkg::DEF_CHANNELS,
  parameter int unsigned WINDOW_SAMPLES = daq_pkg::DEF_WINDOW_SAMPLES,
  localparam int unsigned TW            = $clog2(WINDOW_SAMPLES + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic [CHANNELS-1:0]         sample,
  input  logic                        sample_we,
  input  logic                        sample_last,
  output logic [CHANNELS-1:0][TW-1:0] tot,
  output logic                        tot_valid
);
  logic [CHANNELS-1:0][TW-1:0] count;
  logic [CHANNELS-1:0]         done;
  logic                        first;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count     <= '0;
      done      <= '0;
      first     <= 1'b1;
      tot       <= '0;
      tot_valid <= 1'b0;
    end else begin
      tot_valid <= 1'b0;
      if (sample_we) begin
        for (int c = 0; c < int'(CHANNELS); c++) begin
          // On the first sample of a window the state of the previous one is dropped.
          if (first) begin
            count[c] <= TW'(sample[c]);
            done[c]  <= 1'b0;
          end else if (!done[c]) begin
            if (sample[c])             count[c] <= count[c] + TW'(1);
            else if (count[c] != '0)   done[c]  <= 1'b1;
          end
        end
        first <= sample_last;
        if (sample_last) begin
          tot_valid <= 1'b1;
          for (int c = 0; c < int'(CHANNELS); c++) begin
            if (first)                        tot[c] <= TW'(sample[c]);
            else if (!done[c] && sample[c])   tot[c] <= count[c] + TW'(1);
            else                              tot[c] <= count[c];
          end
        end
      end
    end
  end
endmodule
