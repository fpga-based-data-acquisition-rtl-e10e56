// uart_rx: UART receiver for the link from a slave board to the master
// board in the master-slave configuration.
//
// Receives 8N1 frames (start bit low, eight data bits LSB first, stop bit
// high) at CLKS_PER_BIT clocks per bit, the format uart_tx sends. rxd is
// asynchronous and passes two flops that reset to the idle level (high).
// A falling edge starts a frame; the start bit is checked half a bit later
// and every following bit is sampled one bit period after the previous one,
// i.e. in its middle. On the sample of the stop bit rx_valid pulses for one
// cycle with the byte on rx_data if the stop bit is high; otherwise
// frame_error pulses and the byte is dropped. A start bit that is high again
// at its middle is taken as a glitch and ignored.
//
// The published design links the slave FPGA to the master FPGA by UART but
// gives no detail of either side; this receiver mirrors uart_tx.
module uart_rx #(
  parameter int unsigned CLKS_PER_BIT = daq_pkg::DEF_CLKS_PER_BIT
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic [7:0] rx_data,
  output logic       rx_valid,
  output logic       frame_error
);
  localparam int unsigned DW = $clog2(CLKS_PER_BIT);

  typedef enum logic [1:0] {IDLE, START, DATA, STOP} state_t;

  state_t        state;
  logic          rxd_meta, rxd_s;
  logic [DW-1:0] cnt;
  logic [2:0]    bit_idx;
  logic [7:0]    shift;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rxd_meta    <= 1'b1;
      rxd_s       <= 1'b1;
      state       <= IDLE;
      cnt         <= '0;
      bit_idx     <= '0;
      shift       <= '0;
      rx_data     <= '0;
      rx_valid    <= 1'b0;
      frame_error <= 1'b0;
    end else begin
      rxd_meta    <= rxd;
      rxd_s       <= rxd_meta;
      rx_valid    <= 1'b0;
      frame_error <= 1'b0;
      unique case (state)
        IDLE: begin
          if (!rxd_s) begin
            state <= START;
            cnt   <= DW'(CLKS_PER_BIT / 2 - 1);
          end
        end
        START: begin
          if (cnt != '0) cnt <= cnt - DW'(1);
          else if (rxd_s) state <= IDLE;          // glitch
          else begin
            state   <= DATA;
            cnt     <= DW'(CLKS_PER_BIT - 1);
            bit_idx <= '0;
          end
        end
        DATA: begin
          if (cnt != '0) cnt <= cnt - DW'(1);
          else begin
            shift <= {rxd_s, shift[7:1]};
            cnt   <= DW'(CLKS_PER_BIT - 1);
            if (bit_idx == 3'd7) state <= STOP;
            bit_idx <= bit_idx + 3'd1;
          end
        end
        STOP: begin
          if (cnt != '0) cnt <= cnt - DW'(1);
          else begin
            state <= IDLE;
            if (rxd_s) begin
              rx_data  <= shift;
              rx_valid <= 1'b1;
            end else begin
              frame_error <= 1'b1;
            end
          end
        end
        default: state <= IDLE;
      endcase
    end
  end

  initial begin
    assert (CLKS_PER_BIT >= 4) else $error("uart_rx: CLKS_PER_BIT must be at least 4");
  end
endmodule
