// uart_rx_tb: drives 8N1 frames onto uart_rx's line from a bit-level model
// and checks what comes out. Per frame the model picks one of:
//   - a good frame with a random byte: exactly one rx_valid with that byte;
//   - a frame with a low stop bit: one frame_error pulse and no rx_valid;
//   - a glitch, a low pulse shorter than a quarter bit: nothing at all.
// Frames are separated by random idle gaps, including none. The line is
// driven at a random phase to the receiver clock, and every output pulse is
// checked to last one cycle. CLKS_PER_BIT is reduced to 16.
`timescale 1ns/1ps
module uart_rx_tb;
  localparam int unsigned CPB = 16;
  localparam int unsigned N   = 120;
  localparam int unsigned BIT_NS = CPB * 20;

  logic       clk = 1'b0, rst_n = 1'b0, rxd = 1'b1;
  logic [7:0] rx_data;
  logic       rx_valid, frame_error;
  logic [7:0] exp_q [$];      // expected byte, or
  bit         exp_err [$];    // a frame error instead
  int checks = 0, failures = 0;
  int n_good = 0, n_err = 0, n_glitch = 0, n_valid = 0, n_ferr = 0;
  logic prev_valid = 1'b0, prev_err = 1'b0;

  uart_rx #(.CLKS_PER_BIT(CPB)) dut (
    .clk(clk), .rst_n(rst_n), .rxd(rxd),
    .rx_data(rx_data), .rx_valid(rx_valid), .frame_error(frame_error)
  );

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #(BIT_NS * 12 * (N + 10));
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // output monitor
  always @(posedge clk) if (rst_n) begin
    check(!(rx_valid && frame_error), "rx_valid and frame_error together");
    check(!(rx_valid && prev_valid) && !(frame_error && prev_err), "output pulse longer than one cycle");
    prev_valid <= rx_valid;
    prev_err   <= frame_error;
    if (rx_valid) begin
      n_valid++;
      check(exp_q.size() > 0 && !exp_err[0] && rx_data == exp_q[0],
            $sformatf("byte %h, expected %s %h", rx_data,
                      (exp_err.size() > 0 && exp_err[0]) ? "frame error" : "byte",
                      exp_q.size() > 0 ? exp_q[0] : 8'h00));
      if (exp_q.size() > 0) begin void'(exp_q.pop_front()); void'(exp_err.pop_front()); end
    end
    if (frame_error) begin
      n_ferr++;
      check(exp_err.size() > 0 && exp_err[0], "unexpected frame error");
      if (exp_q.size() > 0) begin void'(exp_q.pop_front()); void'(exp_err.pop_front()); end
    end
  end

  task automatic send_frame(input logic [7:0] b, input logic stop);
    rxd = 1'b0; #(BIT_NS);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; #(BIT_NS); end
    rxd = stop; #(BIT_NS);
    rxd = 1'b1;
  endtask

  initial begin
    logic [7:0] b;
    int kind;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);
    check(!rx_valid && !frame_error, "quiet after reset");
    #($urandom_range(1, 19));
    for (int i = 0; i < int'(N); i++) begin
      kind = $urandom_range(0, 9);
      b = 8'($urandom);
      if (kind < 7) begin
        exp_q.push_back(b); exp_err.push_back(1'b0);
        send_frame(b, 1'b1);
        n_good++;
      end else if (kind < 9) begin
        exp_q.push_back(b); exp_err.push_back(1'b1);
        send_frame(b, 1'b0);
        n_err++;
        #(BIT_NS);            // line back high for a full bit before the next start
      end else begin
        rxd = 1'b0; #(BIT_NS / 4 - 20); rxd = 1'b1;
        #(BIT_NS);
        n_glitch++;
      end
      if ($urandom_range(0, 1) == 0) #($urandom_range(0, 3 * BIT_NS));
    end
    #(BIT_NS * 3);
    check(exp_q.size() == 0, $sformatf("%0d frames not seen", exp_q.size()));
    check(n_valid == n_good, $sformatf("bytes %0d of %0d", n_valid, n_good));
    check(n_ferr == n_err, $sformatf("frame errors %0d of %0d", n_ferr, n_err));
    check(n_good > 0 && n_err > 0 && n_glitch > 0,
          $sformatf("mechanisms: good=%0d error=%0d glitch=%0d", n_good, n_err, n_glitch));
    $display("frames: good=%0d error=%0d glitch=%0d", n_good, n_err, n_glitch);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
