// uart_tx_tb: sends random bytes through uart_tx and decodes the line
// independently: the receiver waits for a falling edge, samples each of the
// ten bits in its middle and checks start bit, data (LSB first) and stop
// bit. It also checks that a frame lasts 10 * CLKS_PER_BIT clocks, that the
// line idles high and that tx_ready is low while a frame is sent.
// CLKS_PER_BIT is reduced to 16 to keep the run short.
`timescale 1ns/1ps
module uart_tx_tb;
  localparam int unsigned CPB = 16;
  localparam int unsigned N   = 60;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic [7:0] tx_data = '0;
  logic       tx_valid = 1'b0;
  logic       tx_ready, txd, busy;
  logic [7:0] sent [$];
  int checks = 0, failures = 0;
  int received = 0;

  uart_tx #(.CLKS_PER_BIT(CPB)) dut (
    .clk(clk), .rst_n(rst_n), .tx_data(tx_data), .tx_valid(tx_valid),
    .tx_ready(tx_ready), .txd(txd), .busy(busy)
  );

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #(20 * CPB * 10 * (N + 10));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    check(txd === 1'b1, "line idles high after reset");
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      tx_data  = 8'($urandom);
      tx_valid = 1'b1;
      do @(posedge clk); while (!tx_ready);
      sent.push_back(tx_data);
      @(negedge clk);
      tx_valid = 1'b0;
      if ($urandom_range(0, 2) == 0) repeat ($urandom_range(1, 40)) @(negedge clk);
    end
  end

  // independent receiver, counting in clock cycles
  initial begin
    logic [7:0] b;
    int len;
    @(posedge rst_n);
    while (received < N) begin
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk);
      check(txd == 1'b0, "start bit");
      check(tx_ready == 1'b0, "tx_ready low during frame");
      for (int k = 0; k < 8; k++) begin
        repeat (CPB) @(posedge clk);
        b[k] = txd;
      end
      repeat (CPB) @(posedge clk);
      check(txd == 1'b1, "stop bit");
      check(sent.size() > 0 && b == sent[0], $sformatf("byte %0d: got %h", received, b));
      if (sent.size() > 0) void'(sent.pop_front());
      // remaining half of the stop bit: the line must stay high until it ends
      len = 0;
      while (busy) begin @(posedge clk); len++; end
      check(len >= int'(CPB / 2) - 1 && len <= int'(CPB / 2) + 1, $sformatf("stop bit tail %0d", len));
      received++;
    end
    check(txd == 1'b1, "line idles high at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
