// digital_delay_tb: checks that every channel comes out exactly 64 sampling
// clocks (128 ns at 500 MHz) after it went in.
//
// Random 16-bit words are applied on the falling edge of a 500 MHz clock;
// the testbench keeps its own history of what it applied and, from cycle 64
// on, compares the output after each rising edge with the word applied 64
// rising edges before. A single-pulse probe then measures the delay in
// clock cycles directly.
`timescale 1ns/1ps
module digital_delay_tb;
  localparam int unsigned CH    = 16;
  localparam int unsigned DELAY = 64;

  logic          clk = 1'b0;
  logic [CH-1:0] din = '0;
  logic [CH-1:0] dout;
  logic [CH-1:0] hist [$];
  int checks = 0, failures = 0;

  digital_delay dut (.clk(clk), .din(din), .dout(dout));

  always #1 clk = ~clk;

  initial begin
    #20000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int rise, seen;
    // flush: the register has no reset
    repeat (DELAY + 2) @(posedge clk);
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      din = CH'($urandom);
      hist.push_back(din);
      @(posedge clk);
      #0.1;
      // dout after edge t is what a downstream flop takes at edge t+1: the
      // word sampled at edge t-(DELAY-1), i.e. DELAY edges before that.
      if (hist.size() >= DELAY) begin
        logic [CH-1:0] exp_w;
        exp_w = hist.pop_front();
        checks++;
        if (dout !== exp_w) begin
          failures++;
          $display("FAIL t=%0d dout=%h exp=%h", t, dout, exp_w);
        end
      end
    end
    // latency probe: one pulse on channel 5
    @(negedge clk); din = '0;
    repeat (DELAY + 2) @(negedge clk);
    din = CH'(1) << 5;
    @(posedge clk); rise = 0;
    @(negedge clk); din = '0;
    seen = -1;
    for (int c = 1; c < 200 && seen < 0; c++) begin
      @(posedge clk); #0.1;
      if (dout[5]) seen = c;
    end
    // seen is the edge after which dout is high; a flop reading dout takes
    // the pulse one edge later, DELAY edges after din was sampled.
    checks++;
    if (seen + 1 != int'(DELAY)) begin
      failures++;
      $display("FAIL latency %0d cycles, expected %0d", seen + 1, DELAY);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
