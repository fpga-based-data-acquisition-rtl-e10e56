// slave_link: the master side of the master-slave configuration. The slave
// board runs the same core and sends its events over its UART TX line to
// this board's slave_rxd input; the master passes them on to the PC through
// its own UART, after its own event.
//
// The slave's bytes are received by uart_rx and buffered in a DEPTH-byte
// FIFO. An arbiter then shares the master's transmitter between two byte
// streams, always a whole event at a time:
//   NONE : the master's own event has priority: if own_valid is high the
//          grant goes to OWN; otherwise, if slave bytes are waiting, to FWD.
//   OWN  : the controller's bytes pass through until own_busy falls, i.e.
//          the whole event has been handed over.
//   FWD  : EVENT_BYTES buffered slave bytes are passed on, waiting for
//          bytes still in flight on the link, then back to NONE.
// With both boards triggered together the master's window is ready long
// before the slave's first byte has crossed the link, so the PC receives
// the master's event and then the slave's.
//
// Interface (all on clk, 50 MHz): own_* is the controller's valid/ready
// byte stream plus its busy flag; tx_* goes to uart_tx. overflow (sticky)
// is set if a slave byte arrived with the buffer full and was dropped;
// frame_error (sticky) if a link frame had a low stop bit. forwarding is
// high in FWD. A board with nothing on slave_rxd (held high) behaves as a
// standalone or master-master board.
//
// The published design shows only that the slave sends its data to the
// master over UART and the master sends to the PC. The buffer, its depth,
// the event-wise arbitration and the assumption that master and slave use
// the same event size are this design's choices. Without an event header
// the PC tells master and slave events apart by their order only.
module slave_link #(
  parameter int unsigned CLKS_PER_BIT = daq_pkg::DEF_CLKS_PER_BIT,
  parameter int unsigned EVENT_BYTES  = daq_pkg::DEF_WINDOW_SAMPLES * ((daq_pkg::DEF_CHANNELS + 7) / 8),
  parameter int unsigned DEPTH        = daq_pkg::DEF_LINK_DEPTH
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       slave_rxd,
  input  logic [7:0] own_data,
  input  logic       own_valid,
  input  logic       own_busy,
  output logic       own_ready,
  output logic [7:0] tx_data,
  output logic       tx_valid,
  input  logic       tx_ready,
  output logic       overflow,
  output logic       frame_error,
  output logic       forwarding
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned EW = $clog2(EVENT_BYTES + 1);

  typedef enum logic [1:0] {G_NONE, G_OWN, G_FWD} grant_t;

  grant_t        grant;
  logic [7:0]    rx_data;
  logic          rx_valid, rx_ferr;
  logic [7:0]    buf_mem [DEPTH];
  logic [AW-1:0] wptr, rptr;
  logic [AW:0]   count;
  logic [EW-1:0] fwd_left;
  logic          push, pop;

  uart_rx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_rx (
    .clk(clk), .rst_n(rst_n), .rxd(slave_rxd),
    .rx_data(rx_data), .rx_valid(rx_valid), .frame_error(rx_ferr)
  );

  assign push       = rx_valid && (count != (AW+1)'(DEPTH));
  assign pop        = (grant == G_FWD) && (count != '0) && tx_ready;
  assign forwarding = (grant == G_FWD);

  always_comb begin
    unique case (grant)
      G_OWN:   begin tx_data = own_data;      tx_valid = own_valid;       end
      G_FWD:   begin tx_data = buf_mem[rptr]; tx_valid = (count != '0);   end
      default: begin tx_data = own_data;      tx_valid = 1'b0;            end
    endcase
  end
  assign own_ready = (grant == G_OWN) && tx_ready;

  always_ff @(posedge clk) begin
    if (push) buf_mem[wptr] <= rx_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grant       <= G_NONE;
      wptr        <= '0;
      rptr        <= '0;
      count       <= '0;
      fwd_left    <= '0;
      overflow    <= 1'b0;
      frame_error <= 1'b0;
    end else begin
      if (push) wptr <= wptr + AW'(1);
      if (pop)  rptr <= rptr + AW'(1);
      count <= count + (AW+1)'(push) - (AW+1)'(pop);
      if (rx_valid && !push) overflow <= 1'b1;
      if (rx_ferr)           frame_error <= 1'b1;
      unique case (grant)
        G_NONE: begin
          if (own_valid) grant <= G_OWN;
          else if (count != '0) begin
            grant    <= G_FWD;
            fwd_left <= EW'(EVENT_BYTES);
          end
        end
        G_OWN: if (!own_busy) grant <= G_NONE;
        G_FWD: begin
          if (pop) begin
            fwd_left <= fwd_left - EW'(1);
            if (fwd_left == EW'(1)) grant <= G_NONE;
          end
        end
        default: grant <= G_NONE;
      endcase
    end
  end

  initial begin
    assert ((1 << AW) == DEPTH && DEPTH >= EVENT_BYTES)
      else $error("slave_link: DEPTH must be a power of two holding one event");
  end
endmodule
