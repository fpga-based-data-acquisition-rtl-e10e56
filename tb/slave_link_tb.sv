// slave_link_tb: tests the master's forwarding of slave events.
// The master's own events come from a producer that behaves like
// daq_controller: busy high for the whole event, one byte at a time on a
// valid/ready handshake with random gaps. The slave's events arrive as 8N1
// frames on slave_rxd from a bit-level model. The transmitter side is a
// model of uart_tx whose ready drops for a random time after every byte.
// Small sizes are used: 12-byte events, a 32-byte buffer, 8 clocks per bit.
// Checks:
//   - every byte handed to the transmitter belongs to a whole event, own or
//     slave, in order per source, never interleaved with the other source;
//   - tx_valid is held while tx_ready is low; forwarding is high exactly for
//     slave bytes; own_ready is never high while a slave event is sent;
//   - own and slave events started together leave own first, then slave;
//   - an own event that starts while a slave event is forwarded waits for
//     its end;
//   - a low stop bit on the link sets frame_error; slave bytes arriving
//     while the transmitter is stalled and the buffer is full set overflow.
// It counts own events, forwarded events, waits for bytes still in flight
// and both error flags, and fails if one never happened.
`timescale 1ns/1ps
module slave_link_tb;
  localparam int unsigned CPB    = 8;
  localparam int unsigned EB     = 12;
  localparam int unsigned DEPTH  = 32;
  localparam int unsigned BIT_NS = CPB * 20;

  logic       clk = 1'b0, rst_n = 1'b0, rxd = 1'b1;
  logic [7:0] own_data = '0, tx_data;
  logic       own_valid = 1'b0, own_busy = 1'b0, own_ready;
  logic       tx_valid, tx_ready = 1'b0;
  logic       overflow, frame_error, forwarding;
  bit         stall = 1'b0;
  int checks = 0, failures = 0;
  int n_own = 0, n_fwd = 0, n_inflight = 0;
  logic [7:0] own_q [$], slv_q [$];  // bytes of events still to come out
  string      order [$];              // source of each completed output event
  int         chunk_pos = 0;
  bit         chunk_slave = 1'b0;
  logic       prev_block = 1'b0;
  logic [7:0] prev_data = '0;
  int         ready_wait = 0;

  slave_link #(.CLKS_PER_BIT(CPB), .EVENT_BYTES(EB), .DEPTH(DEPTH)) dut (
    .clk(clk), .rst_n(rst_n), .slave_rxd(rxd),
    .own_data(own_data), .own_valid(own_valid), .own_busy(own_busy), .own_ready(own_ready),
    .tx_data(tx_data), .tx_valid(tx_valid), .tx_ready(tx_ready),
    .overflow(overflow), .frame_error(frame_error), .forwarding(forwarding)
  );

  always #10 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #(BIT_NS * 10 * EB * 40);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // transmitter model and output checker
  always @(posedge clk) if (rst_n) begin
    if (prev_block) check(tx_valid && tx_data == prev_data, "tx byte withdrawn while not ready");
    prev_block <= tx_valid && !tx_ready;
    prev_data  <= tx_data;
    if (tx_valid && forwarding) check(!own_ready, "own_ready while forwarding");
    if (forwarding && !tx_valid) n_inflight++;
    if (tx_valid && tx_ready) begin
      if (chunk_pos == 0) chunk_slave = forwarding;
      check(forwarding == chunk_slave, "sources interleaved within an event");
      if (chunk_slave) begin
        check(slv_q.size() > 0 && tx_data == slv_q[0], $sformatf("slave byte %h", tx_data));
        if (slv_q.size() > 0) void'(slv_q.pop_front());
      end else begin
        check(own_ready, "own byte without own_ready");
        check(own_q.size() > 0 && tx_data == own_q[0], $sformatf("own byte %h", tx_data));
        if (own_q.size() > 0) void'(own_q.pop_front());
      end
      chunk_pos++;
      if (chunk_pos == int'(EB)) begin
        chunk_pos = 0;
        order.push_back(chunk_slave ? "S" : "O");
        if (chunk_slave) n_fwd++; else n_own++;
      end
    end
  end
  // tx_ready falls for a random time after every byte, as uart_tx's does
  always @(negedge clk) begin
    if (!rst_n || stall) tx_ready <= 1'b0;
    else if (tx_valid && tx_ready) begin tx_ready <= 1'b0; ready_wait = $urandom_range(1, 12); end
    else if (ready_wait > 0) ready_wait--;
    else tx_ready <= 1'b1;
  end

  // the master's controller
  task automatic own_event();
    logic [7:0] b;
    @(negedge clk);
    own_busy = 1'b1;
    for (int i = 0; i < int'(EB); i++) begin
      repeat ($urandom_range(0, 3)) @(negedge clk);
      b = 8'($urandom);
      own_q.push_back(b);
      own_data  = b;
      own_valid = 1'b1;
      do @(posedge clk); while (!own_ready);
      @(negedge clk);
      own_valid = 1'b0;
    end
    own_busy = 1'b0;
  endtask

  // the slave board's UART line
  task automatic slave_frame(input logic [7:0] b, input logic stop);
    rxd = 1'b0; #(BIT_NS);
    for (int i = 0; i < 8; i++) begin rxd = b[i]; #(BIT_NS); end
    rxd = stop; #(BIT_NS);
    rxd = 1'b1;
  endtask
  task automatic slave_event(input bit record);
    logic [7:0] b;
    for (int i = 0; i < int'(EB); i++) begin
      b = 8'($urandom);
      if (record) slv_q.push_back(b);
      slave_frame(b, 1'b1);
    end
  endtask

  task automatic drain();
    wait (own_q.size() == 0 && slv_q.size() == 0 && !forwarding);
    repeat (20) @(posedge clk);
  endtask

  initial begin
    int n0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(posedge clk);

    // own events alone, slave events alone
    repeat (2) own_event();
    drain();
    repeat (2) slave_event(1);
    drain();
    check(order.size() == 4 && order[0] == "O" && order[1] == "O" && order[2] == "S" && order[3] == "S",
          "single-source events");

    // both boards triggered together, several times: own first, then slave
    for (int r = 0; r < 3; r++) begin
      n0 = order.size();
      fork
        own_event();
        begin #($urandom_range(200, 600)); slave_event(1); end
      join
      drain();
      check(order.size() == n0 + 2 && order[n0] == "O" && order[n0 + 1] == "S",
            $sformatf("round %0d: own event then slave event", r));
    end

    // own event starting while a slave event is forwarded waits for it
    n0 = order.size();
    fork
      slave_event(1);
      begin wait (forwarding); #(BIT_NS * 20); own_event(); end
    join
    drain();
    check(order.size() == n0 + 2 && order[n0] == "S" && order[n0 + 1] == "O",
          "own event held until the slave event has been forwarded");

    check(!overflow && !frame_error, "no link errors in normal operation");
    check(own_q.size() == 0 && slv_q.size() == 0, "all bytes delivered");

    // link errors
    slave_frame(8'h5a, 1'b0);
    #(BIT_NS * 2);
    check(frame_error, "frame_error after a low stop bit");
    stall = 1'b1;
    repeat (3) slave_event(0);
    #(BIT_NS * 2);
    check(overflow, "overflow with the transmitter stalled and the buffer full");

    check(n_own > 0 && n_fwd > 0 && n_inflight > 0,
          $sformatf("mechanisms: own=%0d forwarded=%0d in-flight waits=%0d", n_own, n_fwd, n_inflight));
    $display("mechanisms: own=%0d forwarded=%0d in-flight waits=%0d overflow=%0d frame_error=%0d",
             n_own, n_fwd, n_inflight, overflow, frame_error);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
