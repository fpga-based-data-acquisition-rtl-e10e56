// daq_top: back-end data-acquisition core of one FPGA board of the muon
// tomography tracker. It reads the time-over-threshold pulses of two NINO
// boards (16 strips: the X and Y planes of one RPC), keeps a 260 ns window
// of them around every muon trigger at 2 ns resolution, and sends the window
// to a PC over a UART.
//
// Data path (500 MHz, clk_500):
//   nino_in -> digital_delay (128 ns) -> window_fifo write side
//                                     -> tot_counter
// Control and output (50 MHz, clk_50):
//   muon_trigger -> daq_controller -> save_window -> window_fifo
//   window_fifo read side -> daq_controller -> slave_link -> uart_tx -> uart_txd
//   slave_rxd -> slave_link (events of a slave board, forwarded after ours)
//
// Both clocks come from outside: clk_50 from the board oscillator and
// clk_500 from the FPGA PLL, which is vendor IP and not part of this RTL.
// They may have any phase relation; all crossings are synchronised. rst_n
// is asynchronous and is released into each domain by reset_sync.
//
// Ports: nino_in are the received LVDS lines, one per strip, asynchronous.
// muon_trigger is the coincidence output, asynchronous, at least 40 ns wide.
// uart_txd is the serial line (8N1, 115200 Bd by default). trigger_window
// is the 260 ns window level (clk_50 domain). tot/tot_valid carry the
// per-channel pulse widths of each window in 2 ns units (clk_500 domain).
// busy, trigger_accepted and trigger_ignored report the dead time (clk_50);
// fifo_overflow is a sticky error flag (clk_500). slave_rxd receives the
// UART line of a slave board in the master-slave configuration; tie it high
// on a standalone board or a slave. link_overflow and link_frame_error are
// sticky link error flags (clk_50).
//
// Timing: after a trigger edge the window opens within 3 clk_50 cycles; the
// stored window then leaves as WINDOW_SAMPLES * ceil(CHANNELS/8) UART frames,
// 260 bytes or about 22.6 ms at the defaults, during which further triggers
// are not acted on.
//
// The block structure (delay, FIFO, controller, UART TX), the clock
// frequencies and the 128 ns / 260 ns / 130-sample numbers follow the
// published design; the channel count per FPGA follows its test setup with
// both NINO boards on one board, and the slave input its master-slave
// configuration. The TOT outputs, the reset scheme, the FIFO depth, the UART
// rate, the byte layout and the forwarding rule are this design's choices.
module daq_top #(
  parameter int unsigned CHANNELS       = daq_pkg::DEF_CHANNELS,
  parameter int unsigned DELAY_SAMPLES  = daq_pkg::DEF_DELAY_SAMPLES,
  parameter int unsigned WINDOW_SAMPLES = daq_pkg::DEF_WINDOW_SAMPLES,
  parameter int unsigned WINDOW_CYCLES  = daq_pkg::DEF_WINDOW_CYCLES,
  parameter int unsigned FIFO_DEPTH     = daq_pkg::DEF_FIFO_DEPTH,
  parameter int unsigned CLKS_PER_BIT   = daq_pkg::DEF_CLKS_PER_BIT,
  parameter int unsigned LINK_DEPTH     = daq_pkg::DEF_LINK_DEPTH,
  localparam int unsigned TW            = $clog2(WINDOW_SAMPLES + 1)
) (
  input  logic                        clk_50,
  input  logic                        clk_500,
  input  logic                        rst_n,
  input  logic                        muon_trigger,
  input  logic [CHANNELS-1:0]         nino_in,
  input  logic                        slave_rxd,
  output logic                        uart_txd,
  output logic                        trigger_window,
  output logic                        busy,
  output logic                        trigger_accepted,
  output logic                        trigger_ignored,
  output logic                        fifo_overflow,
  output logic                        link_overflow,
  output logic                        link_frame_error,
  output logic [CHANNELS-1:0][TW-1:0] tot,
  output logic                        tot_valid
);
  logic                rst50_n, rst500_n;
  logic [CHANNELS-1:0] delayed;
  logic                cap_we, cap_last;
  logic                rd_en, rd_valid, fifo_empty;
  logic [CHANNELS-1:0] rd_data;
  logic [7:0]          own_data, tx_data;
  logic                own_valid, own_ready, tx_valid, tx_ready;

  reset_sync u_rst50  (.clk(clk_50),  .rst_n_in(rst_n), .rst_n_out(rst50_n));
  reset_sync u_rst500 (.clk(clk_500), .rst_n_in(rst_n), .rst_n_out(rst500_n));

  digital_delay #(.CHANNELS(CHANNELS), .DELAY(DELAY_SAMPLES)) u_delay (
    .clk (clk_500),
    .din (nino_in),
    .dout(delayed)
  );

  window_fifo #(
    .CHANNELS(CHANNELS), .WINDOW_SAMPLES(WINDOW_SAMPLES), .DEPTH(FIFO_DEPTH)
  ) u_fifo (
    .wclk         (clk_500),
    .wrst_n       (rst500_n),
    .sample_in    (delayed),
    .save_window  (trigger_window),
    .capture_start(),
    .capture_we   (cap_we),
    .capture_last (cap_last),
    .overflow     (fifo_overflow),
    .rclk         (clk_50),
    .rrst_n       (rst50_n),
    .rd_en        (rd_en),
    .rd_data      (rd_data),
    .rd_valid     (rd_valid),
    .empty        (fifo_empty)
  );

  tot_counter #(.CHANNELS(CHANNELS), .WINDOW_SAMPLES(WINDOW_SAMPLES)) u_tot (
    .clk        (clk_500),
    .rst_n      (rst500_n),
    .sample     (delayed),
    .sample_we  (cap_we),
    .sample_last(cap_last),
    .tot        (tot),
    .tot_valid  (tot_valid)
  );

  daq_controller #(
    .CHANNELS(CHANNELS), .WINDOW_SAMPLES(WINDOW_SAMPLES), .WINDOW_CYCLES(WINDOW_CYCLES)
  ) u_ctrl (
    .clk             (clk_50),
    .rst_n           (rst50_n),
    .muon_trigger    (muon_trigger),
    .save_window     (trigger_window),
    .trigger_accepted(trigger_accepted),
    .trigger_ignored (trigger_ignored),
    .busy            (busy),
    .fifo_rd_en      (rd_en),
    .fifo_empty      (fifo_empty),
    .fifo_rd_data    (rd_data),
    .fifo_rd_valid   (rd_valid),
    .tx_data         (own_data),
    .tx_valid        (own_valid),
    .tx_ready        (own_ready)
  );

  slave_link #(
    .CLKS_PER_BIT(CLKS_PER_BIT),
    .EVENT_BYTES (WINDOW_SAMPLES * ((CHANNELS + 7) / 8)),
    .DEPTH       (LINK_DEPTH)
  ) u_link (
    .clk        (clk_50),
    .rst_n      (rst50_n),
    .slave_rxd  (slave_rxd),
    .own_data   (own_data),
    .own_valid  (own_valid),
    .own_busy   (busy),
    .own_ready  (own_ready),
    .tx_data    (tx_data),
    .tx_valid   (tx_valid),
    .tx_ready   (tx_ready),
    .overflow   (link_overflow),
    .frame_error(link_frame_error),
    .forwarding ()
  );

  uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk     (clk_50),
    .rst_n   (rst50_n),
    .tx_data (tx_data),
    .tx_valid(tx_valid),
    .tx_ready(tx_ready),
    .txd     (uart_txd),
    .busy    ()
  );
endmodule
