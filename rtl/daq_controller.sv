// daq_controller: the controller of the DAQ IP core, in the 50 MHz domain.
//
// It waits for a muon trigger, opens the trigger window and, once the window
// has closed, moves the stored window out of the FIFO to the UART.
//
//   IDLE   : a rising edge of the (synchronised) muon trigger raises
//            save_window ("trigger to save data") and starts the window.
//   WINDOW : save_window stays high for WINDOW_CYCLES clocks (13 x 20 ns =
//            260 ns). The FIFO side captures the samples meanwhile.
//   FETCH  : pops one FIFO word (one sample of all channels) when the FIFO
//            is not empty ("trigger to send data").
//   LOAD   : waits for the word (one cycle read latency).
//   SEND   : offers the word to the UART byte by byte, channels 0-7 first,
//            until BYTES bytes are taken; then FETCH again, or IDLE after
//            WINDOW_SAMPLES words.
//
// A trigger edge that arrives while the controller is not in IDLE (the dead
// time of one event, dominated by the UART) is not acted on; it pulses
// trigger_ignored instead. trigger_accepted pulses for each trigger that
// opened a window. busy is high outside IDLE. The trigger input is
// asynchronous and must stay high for at least two clock periods (40 ns).
//
// Output stream per event: WINDOW_SAMPLES samples in time order, each sample
// BYTES = ceil(CHANNELS/8) bytes, bit i of byte b being channel 8*b+i.
// The window width, the 50 MHz clock and the split of work (window on
// trigger, then send on command) are the published design; the state
// machine, the dead-time rule and the byte layout are this design's choice.
module daq_controller #(
  parameter int unsigned CHANNELS       = daq_pkg::DEF_CHANNELS,
  parameter int unsigned WINDOW_SAMPLES = daq_pkg::DEF_WINDOW_SAMPLES,
  parameter int unsigned WINDOW_CYCLES  = daq_pkg::DEF_WINDOW_CYCLES
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                muon_trigger,
  output logic                save_window,
  output logic                trigger_accepted,
  output logic                trigger_ignored,
  output logic                busy,
  output logic                fifo_rd_en,
  input  logic                fifo_empty,
  input  logic [CHANNELS-1:0] fifo_rd_data,
  input  logic                fifo_rd_valid,
  output logic [7:0]          tx_data,
  output logic                tx_valid,
  input  logic                tx_ready
);
  localparam int unsigned BYTES = (CHANNELS + 7) / 8;
  localparam int unsigned SW    = $clog2(WINDOW_SAMPLES + 1);
  localparam int unsigned WW    = $clog2(WINDOW_CYCLES + 1);
  localparam int unsigned BW    = (BYTES > 1) ? $clog2(BYTES) : 1;

  typedef enum logic [2:0] {IDLE, WINDOW, FETCH, LOAD, SEND} state_t;

  state_t                 state;
  logic                   trig_sync, trig_d, trig_edge;
  logic [WW-1:0]          win_cnt;
  logic [SW-1:0]          words_left;
  logic [BW-1:0]          byte_idx;
  logic [BYTES*8-1:0]     word;

  sync_ff #(.WIDTH(1)) u_sync_trig (
    .clk(clk), .rst_n(rst_n), .d(muon_trigger), .q(trig_sync)
  );
  assign trig_edge = trig_sync && !trig_d;

  assign busy        = (state != IDLE);
  assign save_window = (state == WINDOW);
  assign fifo_rd_en  = (state == FETCH) && !fifo_empty;
  assign tx_valid    = (state == SEND);
  assign tx_data     = word[8*byte_idx +: 8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state            <= IDLE;
      trig_d           <= 1'b0;
      win_cnt          <= '0;
      words_left       <= '0;
      byte_idx         <= '0;
      word             <= '0;
      trigger_accepted <= 1'b0;
      trigger_ignored  <= 1'b0;
    end else begin
      trig_d           <= trig_sync;
      trigger_accepted <= 1'b0;
      trigger_ignored  <= trig_edge && (state != IDLE);
      unique case (state)
        IDLE: begin
          if (trig_edge) begin
            state            <= WINDOW;
            win_cnt          <= WW'(WINDOW_CYCLES - 1);
            words_left       <= SW'(WINDOW_SAMPLES);
            trigger_accepted <= 1'b1;
          end
        end
        WINDOW: begin
          if (win_cnt == '0) state <= FETCH;
          else               win_cnt <= win_cnt - WW'(1);
        end
        FETCH: begin
          if (!fifo_empty) state <= LOAD;
        end
        LOAD: begin
          if (fifo_rd_valid) begin
            word     <= (BYTES*8)'(fifo_rd_data);
            byte_idx <= '0;
            state    <= SEND;
          end
        end
        SEND: begin
          if (tx_ready) begin
            if (byte_idx == BW'(BYTES - 1)) begin
              if (words_left == SW'(1)) state <= IDLE;
              else                      state <= FETCH;
              words_left <= words_left - SW'(1);
            end else begin
              byte_idx <= byte_idx + BW'(1);
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  a_no_read_when_empty: assert property (@(posedge clk) disable iff (!rst_n)
    fifo_rd_en |-> !fifo_empty);
  a_window_width: assert property (@(posedge clk) disable iff (!rst_n)
    $rose(save_window) |-> save_window [*WINDOW_CYCLES] ##1 !save_window);
endmodule
