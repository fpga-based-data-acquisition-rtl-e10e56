// window_fifo: the FIFO memory of the DAQ, which keeps the samples of all
// channels that lie inside one trigger window.
//
// The controller (50 MHz) raises save_window when a muon trigger arrives.
// On the 500 MHz side that level is synchronised and its rising edge starts
// a capture of exactly WINDOW_SAMPLES consecutive samples of the delayed
// NINO data (130 samples of 2 ns = 260 ns). Each sample, one bit per channel,
// is one FIFO word. The words are read out on the 50 MHz side through an
// asynchronous FIFO (async_fifo).
//
// Write side (wclk, 500 MHz): sample_in is the output of digital_delay.
// capture_we marks the cycles whose sample is stored and capture_last the
// last of them; both go to tot_counter. capture_start pulses on the cycle
// before the first stored sample. overflow is sticky and is set if a word
// could not be stored because the FIFO was full. A new rising edge of
// save_window while a capture is running is ignored.
// Read side (rclk, 50 MHz): rd_en / rd_data / rd_valid / empty as in
// async_fifo (one cycle read latency).
//
// The window length and the 500 MHz write clock are the published values;
// counting the window in the sampling domain (rather than gating by the
// 50 MHz window level) and the depth of 256 words are this design's choice.
module window_fifo #(
  parameter int unsigned CHANNELS       = daq_pkg::DEF_CHANNELS,
  parameter int unsigned WINDOW_SAMPLES = daq_pkg::DEF_WINDOW_SAMPLES,
  parameter int unsigned DEPTH          = daq_pkg::DEF_FIFO_DEPTH
) (
  input  logic                wclk,
  input  logic                wrst_n,
  input  logic [CHANNELS-1:0] sample_in,
  input  logic                save_window,
  output logic                capture_start,
  output logic                capture_we,
  output logic                capture_last,
  output logic                overflow,
  input  logic                rclk,
  input  logic                rrst_n,
  input  logic                rd_en,
  output logic [CHANNELS-1:0] rd_data,
  output logic                rd_valid,
  output logic                empty
);
  localparam int unsigned CW = $clog2(WINDOW_SAMPLES + 1);

  logic          save_sync, save_d;
  logic [CW-1:0] remaining;
  logic          wr_drop;

  sync_ff #(.WIDTH(1)) u_sync_save (
    .clk(wclk), .rst_n(wrst_n), .d(save_window), .q(save_sync)
  );

  assign capture_we   = (remaining != '0);
  assign capture_last = (remaining == CW'(1));

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      save_d        <= 1'b0;
      remaining     <= '0;
      capture_start <= 1'b0;
      overflow      <= 1'b0;
    end else begin
      save_d        <= save_sync;
      capture_start <= 1'b0;
      if (save_sync && !save_d && !capture_we) begin
        remaining     <= CW'(WINDOW_SAMPLES);
        capture_start <= 1'b1;
      end else if (capture_we) begin
        remaining <= remaining - CW'(1);
      end
      if (wr_drop) overflow <= 1'b1;
    end
  end

  async_fifo #(.WIDTH(CHANNELS), .DEPTH(DEPTH)) u_fifo (
    .wclk    (wclk),
    .wrst_n  (wrst_n),
    .wr_en   (capture_we),
    .wr_data (sample_in),
    .full    (),
    .wr_drop (wr_drop),
    .rclk    (rclk),
    .rrst_n  (rrst_n),
    .rd_en   (rd_en),
    .rd_data (rd_data),
    .rd_valid(rd_valid),
    .empty   (empty)
  );

  initial begin
    assert (DEPTH >= WINDOW_SAMPLES)
      else $error("window_fifo: DEPTH must hold one full window");
  end
endmodule
