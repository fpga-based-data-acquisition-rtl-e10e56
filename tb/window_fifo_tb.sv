// window_fifo_tb: checks the windowed capture and the clock crossing of the
// DAQ FIFO memory at its default size (16 channels, 130-sample window,
// 256 words), with a 500 MHz write clock and a 50 MHz read clock.
//
// The sample input is a free-running count of 500 MHz edges, so every stored
// word tells when it was taken. The testbench raises save_window for 13
// cycles of 50 MHz (260 ns) and checks that:
//   - exactly 130 words are stored (capture_we count, capture_last on the
//     130th), beginning 3 or 4 sampling edges after save_window rises
//     (synchroniser plus edge detector);
//   - reading on the 50 MHz side returns 130 consecutive counts, in order,
//     with the first one matching the capture start;
//   - a second rising edge during a capture starts nothing;
//   - two windows without any read (260 words) overflow the 256-word FIFO:
//     overflow is set and the 256 oldest words read back intact.
`timescale 1ns/1ps
module window_fifo_tb;
  localparam int unsigned CH = 16;
  localparam int unsigned WS = 130;
  localparam int unsigned DEPTH = 256;

  logic          wclk = 1'b0, rclk = 1'b0, rst_n = 1'b0;
  logic [CH-1:0] cnt = '0;
  logic          save = 1'b0, rd_en = 1'b0;
  logic          cap_start, cap_we, cap_last, overflow, rd_valid, empty;
  logic [CH-1:0] rd_data;
  int checks = 0, failures = 0;
  int we_count = 0, last_at = -1;
  longint save_rise_edge = 0;
  longint wedge = 0;          // index of the current 500 MHz edge
  int     first_word_edge = -1;

  window_fifo dut (
    .wclk(wclk), .wrst_n(rst_n), .sample_in(cnt), .save_window(save),
    .capture_start(cap_start), .capture_we(cap_we), .capture_last(cap_last),
    .overflow(overflow),
    .rclk(rclk), .rrst_n(rst_n), .rd_en(rd_en), .rd_data(rd_data),
    .rd_valid(rd_valid), .empty(empty)
  );

  always #1  wclk = ~wclk;
  always #10 rclk = ~rclk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample source and write-side monitor
  always @(posedge wclk) begin
    wedge <= wedge + 1;
    if (cap_we) begin
      we_count <= we_count + 1;
      if (we_count == 0) first_word_edge <= int'(wedge);
      if (cap_last) last_at <= we_count + 1;
    end
  end
  always @(negedge wclk) cnt <= CH'(wedge);

  task automatic open_window(input bit glitch);
    @(negedge rclk);
    save = 1'b1;
    save_rise_edge = wedge;
    repeat (3) @(negedge rclk);
    if (glitch) begin
      save = 1'b0; @(negedge rclk); save = 1'b1;   // second edge inside capture
      repeat (8) @(negedge rclk);
    end else
      repeat (10) @(negedge rclk);
    save = 1'b0;
  endtask

  task automatic read_words(input int n, output logic [CH-1:0] words [$]);
    words = {};
    while (words.size() < n) begin
      @(negedge rclk);
      rd_en = !empty;
      @(posedge rclk); #0.1;
      rd_en = 1'b0;
      if (rd_valid) words.push_back(rd_data);
    end
    @(negedge rclk); rd_en = 1'b0;
    @(posedge rclk); #0.1;
    if (rd_valid) words.push_back(rd_data);
  endtask

  initial begin
    logic [CH-1:0] words [$];
    int lag;
    repeat (4) @(negedge rclk);
    rst_n = 1'b1;
    repeat (4) @(negedge rclk);
    check(empty && !overflow, "empty and no overflow after reset");

    for (int w = 0; w < 3; w++) begin
      we_count = 0; last_at = -1; first_word_edge = -1;
      open_window(w == 1);
      repeat (20) @(negedge rclk);        // capture is over by now
      check(we_count == int'(WS), $sformatf("window %0d: %0d words stored", w, we_count));
      check(last_at == int'(WS), $sformatf("window %0d: capture_last at word %0d", w, last_at));
      lag = first_word_edge - int'(save_rise_edge);
      check(lag >= 3 && lag <= 5, $sformatf("window %0d: capture starts %0d edges after request", w, lag));
      read_words(WS, words);
      check(words.size() == int'(WS), $sformatf("window %0d: read %0d words", w, words.size()));
      check(empty, "FIFO empty after reading one window");
      for (int k = 0; k < int'(WS) && k < words.size(); k++)
        check(words[k] == CH'(first_word_edge + k),
              $sformatf("window %0d word %0d = %0d, exp %0d", w, k, words[k], first_word_edge + k));
    end
    check(!overflow, "no overflow while every window is read");

    // two windows without reading: 260 words into 256 places
    we_count = 0;
    open_window(0);
    repeat (20) @(negedge rclk);
    begin
      int first0;
      first0 = first_word_edge;
      we_count = 0;
      open_window(0);
      repeat (20) @(negedge rclk);
      check(overflow, "overflow flagged after 260 unread words");
      read_words(DEPTH, words);
      check(words.size() == int'(DEPTH), "256 words held");
      for (int k = 0; k < int'(WS); k++)
        check(words[k] == CH'(first0 + k), $sformatf("overflow: old word %0d intact", k));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
