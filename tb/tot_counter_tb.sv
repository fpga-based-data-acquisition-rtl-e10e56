// tot_counter_tb: feeds windows of 130 samples with random pulses on each
// of 16 channels and compares the reported time-over-threshold with a
// reference computed here from the applied samples: the length of the first
// run of ones in the window (0 if none). Windows include pulses at the
// window edges, double pulses, empty channels and gaps between windows; the
// result must be flagged on the clock edge that takes the last sample.
`timescale 1ns/1ps
module tot_counter_tb;
  localparam int unsigned CH = 16;
  localparam int unsigned WS = 130;
  localparam int unsigned TW = $clog2(WS + 1);

  logic                  clk = 1'b0, rst_n = 1'b0;
  logic [CH-1:0]         sample = '0;
  logic                  we = 1'b0, last = 1'b0;
  logic [CH-1:0][TW-1:0] tot;
  logic                  tot_valid;
  logic [CH-1:0]         win [WS];
  int checks = 0, failures = 0;

  tot_counter dut (
    .clk(clk), .rst_n(rst_n), .sample(sample), .sample_we(we), .sample_last(last),
    .tot(tot), .tot_valid(tot_valid)
  );

  always #1 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic int first_run(input int c);
    int n = 0;
    bit started = 0;
    for (int k = 0; k < int'(WS); k++) begin
      if (win[k][c]) begin n++; started = 1; end
      else if (started) break;
    end
    return n;
  endfunction

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int w = 0; w < 40; w++) begin
      // build the window: up to two pulses per channel
      for (int k = 0; k < int'(WS); k++) win[k] = '0;
      for (int c = 0; c < int'(CH); c++) begin
        int np, st, ln;
        np = $urandom_range(0, 2);
        for (int p = 0; p < np; p++) begin
          st = (w % 4 == 0 && p == 0) ? 0 : $urandom_range(0, WS - 1);
          ln = $urandom_range(1, 30);
          if (w % 4 == 1 && p == 0) st = WS - ln;
          for (int k = st; k < st + ln && k < int'(WS); k++) win[k][c] = 1'b1;
        end
      end
      for (int k = 0; k < int'(WS); k++) begin
        @(negedge clk);
        sample = win[k];
        we     = 1'b1;
        last   = (k == int'(WS) - 1);
        @(posedge clk); #0.1;
        // tot_valid rises on the edge that takes the last sample
        checks++;
        if (tot_valid != last) begin failures++; $display("FAIL tot_valid at sample %0d", k); end
      end
      @(negedge clk);
      we = 1'b0; last = 1'b0; sample = CH'($urandom);  // not stored, must be ignored
      checks++;
      if (!tot_valid) begin failures++; $display("FAIL tot_valid missing, window %0d", w); end
      for (int c = 0; c < int'(CH); c++) begin
        checks++;
        if (int'(tot[c]) != first_run(c)) begin
          failures++;
          $display("FAIL window %0d ch %0d tot=%0d exp=%0d", w, c, tot[c], first_run(c));
        end
      end
      repeat ($urandom_range(0, 5)) @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
