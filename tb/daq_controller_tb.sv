// daq_controller_tb: runs the 50 MHz controller against a FIFO model and a
// UART model with random ready gaps, at the default 16 channels and 130
// samples per window.
//
// The FIFO model fills with 10 random words per clock while save_window is
// high (130 words for a 13-cycle window), and answers a read with the next
// word one clock later. The testbench checks that:
//   - a trigger edge opens save_window 2 or 3 clocks later, for exactly 13
//     clocks (260 ns), and pulses trigger_accepted;
//   - the controller sends 260 bytes: every word low byte (channels 0-7)
//     first, in FIFO order, and keeps tx_data stable while it waits for
//     tx_ready;
//   - triggers arriving while busy pulse trigger_ignored and open no window;
//   - busy falls after the last byte and the next trigger is served.
`timescale 1ns/1ps
module daq_controller_tb;
  localparam int unsigned CH = 16;
  localparam int unsigned WS = 130;
  localparam int unsigned WC = 13;

  logic          clk = 1'b0, rst_n = 1'b0, trig = 1'b0;
  logic          save, acc, ign, busy, rd_en, rd_valid = 1'b0, tx_valid, tx_ready;
  logic [CH-1:0] rd_data = '0;
  logic [7:0]    tx_data;
  logic [CH-1:0] fifo_q [$];
  logic          q_empty = 1'b1;
  logic [7:0]    exp_bytes [$];
  int checks = 0, failures = 0;
  int n_acc = 0, n_ign = 0, n_bytes = 0, win_len = 0, win_count = 0;
  bit stall_seen = 0;

  daq_controller dut (
    .clk(clk), .rst_n(rst_n), .muon_trigger(trig), .save_window(save),
    .trigger_accepted(acc), .trigger_ignored(ign), .busy(busy),
    .fifo_rd_en(rd_en), .fifo_empty(q_empty), .fifo_rd_data(rd_data),
    .fifo_rd_valid(rd_valid), .tx_data(tx_data), .tx_valid(tx_valid), .tx_ready(tx_ready)
  );

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // FIFO model, UART model and monitors
  logic [7:0] held;
  bit         waiting = 0;
  always @(posedge clk) if (rst_n) begin
    rd_valid <= 1'b0;
    if (rd_en) begin
      rd_valid <= 1'b1;
      rd_data  <= fifo_q.pop_front();
    end
    if (save) begin
      for (int i = 0; i < 10; i++) begin
        logic [CH-1:0] w;
        w = CH'($urandom);
        fifo_q.push_back(w);
        for (int b = 0; b < (int'(CH) + 7) / 8; b++) exp_bytes.push_back(w[8*b +: 8]);
      end
      win_len <= win_len + 1;
    end
    if (acc) n_acc <= n_acc + 1;
    if (ign) n_ign <= n_ign + 1;
    if (tx_valid && waiting) begin
      checks++;
      if (tx_data !== held) begin failures++; $display("FAIL tx_data changed while waiting"); end
    end
    waiting <= tx_valid && !tx_ready;
    held    <= tx_data;
    if (tx_valid && !tx_ready) stall_seen = 1;
    if (tx_valid && tx_ready) begin
      checks++;
      if (exp_bytes.size() == 0 || tx_data !== exp_bytes[0]) begin
        failures++;
        $display("FAIL byte %0d = %h, exp %h", n_bytes, tx_data, (exp_bytes.size() != 0) ? exp_bytes[0] : 8'h00);
      end
      if (exp_bytes.size() != 0) void'(exp_bytes.pop_front());
      n_bytes <= n_bytes + 1;
    end
  end
  always @(negedge clk) tx_ready <= ($urandom_range(0, 3) == 0);
  always @(negedge clk) q_empty  <= (fifo_q.size() == 0);

  task automatic pulse_trigger(input int width_clks);
    @(negedge clk); trig = 1'b1;
    repeat (width_clks) @(negedge clk);
    trig = 1'b0;
  endtask

  initial begin
    int lat;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    for (int e = 0; e < 3; e++) begin
      win_len = 0;
      n_bytes = 0;
      @(negedge clk); trig = 1'b1;
      lat = 0;
      while (!save) begin @(negedge clk); lat++; end
      check(lat >= 2 && lat <= 3, $sformatf("event %0d: window opens %0d clocks after trigger", e, lat));
      repeat (3) @(negedge clk); trig = 1'b0;
      while (save) @(negedge clk);
      check(win_len == int'(WC), $sformatf("event %0d: window %0d clocks", e, win_len));
      // triggers during the dead time
      repeat (50) @(negedge clk);
      pulse_trigger(3);
      repeat (200) @(negedge clk);
      pulse_trigger(5);
      while (busy) @(negedge clk);
      check(n_bytes == int'(WS) * 2, $sformatf("event %0d: %0d bytes sent", e, n_bytes));
      check(exp_bytes.size() == 0 && fifo_q.size() == 0, "everything read and sent");
      check(n_acc == e + 1, $sformatf("accepted %0d", n_acc));
      check(n_ign == 2 * (e + 1), $sformatf("ignored %0d", n_ign));
      repeat (10) @(negedge clk);
    end
    check(stall_seen, "UART back-pressure exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
