// uart_tx: UART transmitter driving the TX pin towards the PC.
//
// Sends one byte per frame in 8N1 format: a low start bit, eight data bits
// LSB first, one high stop bit; the line idles high. Every bit lasts
// CLKS_PER_BIT cycles of clk, so a frame takes 10 * CLKS_PER_BIT cycles.
//
// Interface: a byte is taken when tx_valid and tx_ready are both high on a
// rising edge of clk; tx_ready is high only while the transmitter is idle,
// and the start bit begins on the next cycle. busy is high while a frame is
// on the line.
//
// The published design has a UART module with a TX pin clocked at 50 MHz and
// a CH340G USB bridge on the PC side. It gives no bit rate or frame format;
// 115200 Bd (CLKS_PER_BIT = 434 at 50 MHz) and 8N1 are this design's choice.
module uart_tx #(
  parameter int unsigned CLKS_PER_BIT = daq_pkg::DEF_CLKS_PER_BIT
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] tx_data,
  input  logic       tx_valid,
  output logic       tx_ready,
  output logic       txd,
  output logic       busy
);
  localparam int unsigned DW = $clog2(CLKS_PER_BIT);

  logic [DW-1:0] baud_cnt;
  logic [3:0]    bit_idx;   // 0 start, 1..8 data, 9 stop
  logic [9:0]    frame;

  assign tx_ready = !busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      txd      <= 1'b1;
      baud_cnt <= '0;
      bit_idx  <= '0;
      frame    <= '1;
    end else if (!busy) begin
      txd <= 1'b1;
      if (tx_valid) begin
        frame    <= {1'b1, tx_data, 1'b0};
        busy     <= 1'b1;
        baud_cnt <= '0;
        bit_idx  <= '0;
        txd      <= 1'b0;
      end
    end else if (baud_cnt == DW'(CLKS_PER_BIT - 1)) begin
      baud_cnt <= '0;
      if (bit_idx == 4'd9) begin
        busy <= 1'b0;
        txd  <= 1'b1;
      end else begin
        bit_idx <= bit_idx + 4'd1;
        txd     <= frame[bit_idx + 4'd1];
      end
    end else begin
      baud_cnt <= baud_cnt + DW'(1);
    end
  end

  // The byte may not change while it is offered and not yet taken.
  property p_hold;
    @(posedge clk) disable iff (!rst_n)
      (tx_valid && !tx_ready) |=> tx_valid;
  endproperty
  a_hold: assert property (p_hold);

  initial begin
    assert (CLKS_PER_BIT >= 2) else $error("uart_tx: CLKS_PER_BIT must be at least 2");
  end
endmodule
