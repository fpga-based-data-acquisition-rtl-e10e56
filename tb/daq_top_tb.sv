// daq_top_tb: end-to-end test of the back-end DAQ core. It plays muon events
// into the NINO inputs, decodes the UART line with its own receiver and
// checks every event's window against what it drove. Two boards run as in
// the master-slave configuration: the slave is a second daq_top with the
// same inputs whose UART line feeds the master's slave_rxd, and only the
// master's line is decoded.
//
// Each event has a trigger at time T and a cluster of 1-3 fired strips in
// each plane (channels 0-7 = X, 8-15 = Y). A strip's pulse starts at
// T + off (off from -30 to +60 ns, even) and lasts w (10 to 64 ns, even), so
// some pulses begin before the trigger, as the NINO output does in the real
// setup. The clocks are 500 MHz and 50 MHz, phase aligned as from one PLL.
// Per event the testbench checks:
//   - 520 bytes arrive and decode as 8N1 frames: the master's window of
//     260 bytes (130 samples x 2 bytes), then the slave's, forwarded by the
//     master; the slave's window equals the master's;
//   - every fired channel shows exactly w/2 consecutive ones and nothing
//     else; silent channels are all zero;
//   - the first one of every channel sits at off/2 + K, with one K shared by
//     all channels of the event: the 128 ns delay lines up the strips with
//     the trigger. The window opens 40-60 ns after the trigger edge (two
//     synchroniser flops and one state register at 50 MHz) and its first
//     sample is taken 3-4 sampling edges later, so K = 64 - (46..68 ns)/2
//     lies between 29 and 42 samples;
//   - tot reports w/2 for fired channels and 0 for the others;
//   - triggers sent while the event is being transmitted are ignored
//     (trigger_ignored) and produce no data; fifo_overflow and the link
//     error flags never rise.
// It also counts how often each mechanism happened (window capture, a pulse
// recovered from before the trigger, a hit in the second byte of a sample,
// an ignored trigger, a TOT result, a forwarded slave event) and fails if
// one never did.
// The UART runs at 4 clocks per bit here to keep the run short.
`timescale 1ns/1ps
module daq_top_tb;
  localparam int unsigned CH     = daq_pkg::DEF_CHANNELS;
  localparam int unsigned WS     = daq_pkg::DEF_WINDOW_SAMPLES;
  localparam int unsigned TW     = $clog2(WS + 1);
  localparam int unsigned BYTES  = (CH + 7) / 8;
  localparam int unsigned CPB    = 4;
  localparam int unsigned EVENTS = 6;

  logic                  clk_50 = 1'b0, clk_500 = 1'b0, rst_n = 1'b0, trig = 1'b0;
  logic [CH-1:0]         nino = '0;
  logic                  txd, twin, busy, acc, ign, ovf, tot_valid;
  logic [CH-1:0][TW-1:0] tot;
  logic                  link_ovf, link_ferr;
  logic                  s_txd, s_twin, s_busy, s_acc, s_ign, s_ovf, s_tot_valid, s_link_ovf, s_link_ferr;
  logic [CH-1:0][TW-1:0] s_tot;
  logic [7:0]            rx_q [$];
  int checks = 0, failures = 0;
  int k_min = 1000, k_max = -1000;
  int n_windows = 0, n_pretrig = 0, n_byte1 = 0, n_ignored = 0, n_tot = 0, n_forwarded = 0;

  daq_top #(.CLKS_PER_BIT(CPB)) dut (
    .clk_50(clk_50), .clk_500(clk_500), .rst_n(rst_n), .muon_trigger(trig),
    .nino_in(nino), .slave_rxd(s_txd), .uart_txd(txd), .trigger_window(twin), .busy(busy),
    .trigger_accepted(acc), .trigger_ignored(ign), .fifo_overflow(ovf),
    .link_overflow(link_ovf), .link_frame_error(link_ferr),
    .tot(tot), .tot_valid(tot_valid)
  );

  // slave board: same strips and trigger, its UART line goes to the master
  daq_top #(.CLKS_PER_BIT(CPB)) slv (
    .clk_50(clk_50), .clk_500(clk_500), .rst_n(rst_n), .muon_trigger(trig),
    .nino_in(nino), .slave_rxd(1'b1), .uart_txd(s_txd), .trigger_window(s_twin), .busy(s_busy),
    .trigger_accepted(s_acc), .trigger_ignored(s_ign), .fifo_overflow(s_ovf),
    .link_overflow(s_link_ovf), .link_frame_error(s_link_ferr),
    .tot(s_tot), .tot_valid(s_tot_valid)
  );

  always #1  clk_500 = ~clk_500;
  always #10 clk_50  = ~clk_50;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #(EVENTS * (2 * (CPB * 10 + 1) * 20 * WS * BYTES + CPB * 10 * 20 * 8 + 20000) + 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // UART receiver: 8N1, mid-bit sampling counted in clk_50 cycles
  initial begin
    logic [7:0] b;
    @(posedge rst_n);
    forever begin
      @(negedge txd);
      repeat (CPB / 2) @(posedge clk_50);
      if (txd !== 1'b0) begin
        failures++; checks++; $display("FAIL UART start bit");
      end
      for (int k = 0; k < 8; k++) begin
        repeat (CPB) @(posedge clk_50);
        b[k] = txd;
      end
      repeat (CPB) @(posedge clk_50);
      checks++;
      if (txd !== 1'b1) begin failures++; $display("FAIL UART stop bit"); end
      rx_q.push_back(b);
    end
  end

  always @(posedge clk_50) if (rst_n && ign) n_ignored++;
  always @(posedge clk_500) begin
    if (rst_n && (ovf || s_ovf)) begin
      checks++; failures++; $display("FAIL fifo_overflow set");
    end
  end
  always @(posedge clk_50) begin
    if (rst_n && (link_ovf || link_ferr || s_link_ovf || s_link_ferr)) begin
      checks++; failures++; $display("FAIL link error flag set");
    end
  end

  // pulse generator: one process per fired strip
  task automatic drive_pulse(input int c, input int start_ns, input int width_ns);
    fork
      begin
        #(start_ns);
        nino[c] = 1'b1;
        #(width_ns);
        nino[c] = 1'b0;
      end
    join_none
  endtask

  int  off [CH];
  int  wid [CH];
  bit  fired [CH];
  logic [CH-1:0][TW-1:0] tot_seen;
  bit  tot_seen_valid;
  always @(posedge clk_500) if (rst_n && tot_valid) begin tot_seen <= tot; tot_seen_valid <= 1'b1; n_tot++; end

  initial begin
    logic [CH-1:0] win [WS];
    bit same;
    int k0, ones, first, kref;
    bit contiguous;
    repeat (10) @(posedge clk_50);
    rst_n = 1'b1;
    repeat (20) @(posedge clk_50);   // also flushes the delay line

    for (int e = 0; e < int'(EVENTS); e++) begin
      int xc, yc, nx, ny;
      // align to a random 500 MHz falling edge (even ns)
      @(posedge clk_50);
      repeat ($urandom_range(0, 9)) @(negedge clk_500);
      @(negedge clk_500);
      for (int c = 0; c < int'(CH); c++) fired[c] = 0;
      xc = $urandom_range(0, 7); nx = $urandom_range(1, 3);
      yc = $urandom_range(8, 15); ny = $urandom_range(1, 3);
      for (int c = 0; c < int'(CH); c++)
        if ((c >= xc && c < xc + nx && c < 8) || (c >= yc && c < yc + ny && c < int'(CH)))
          fired[c] = 1;
      // the trigger is at "now + 40 ns"; pulses may start up to 30 ns before it
      for (int c = 0; c < int'(CH); c++) if (fired[c]) begin
        off[c] = 2 * $urandom_range(0, 45) - 30;
        if (c == xc && e % 2 == 0) off[c] = -2 * $urandom_range(1, 15);  // before the trigger
        wid[c] = 2 * $urandom_range(5, 32);
        drive_pulse(c, 40 + off[c], wid[c]);
      end
      tot_seen_valid = 0;
      #40;
      trig = 1'b1;
      #60;
      trig = 1'b0;
      // wait for the first bytes, then fire two triggers into the dead time
      wait (rx_q.size() >= 4);
      check(busy, "busy while the event is sent");
      @(negedge clk_500); trig = 1'b1; #60; trig = 1'b0;
      #(CPB * 10 * 20 * 40);
      @(negedge clk_500); trig = 1'b1; #60; trig = 1'b0;
      wait (rx_q.size() >= int'(2 * WS * BYTES));
      n_windows++;
      // unpack the window
      for (int k = 0; k < int'(WS); k++)
        for (int b = 0; b < int'(BYTES); b++) begin
          logic [7:0] v;
          v = rx_q.pop_front();
          for (int i = 0; i < 8; i++) if (8 * b + i < int'(CH)) win[k][8 * b + i] = v[i];
        end
      kref = -1000;
      for (int c = 0; c < int'(CH); c++) begin
        ones = 0; first = -1; contiguous = 1;
        for (int k = 0; k < int'(WS); k++) if (win[k][c]) begin
          if (first < 0) first = k;
          else if (!win[k-1][c]) contiguous = 0;
          ones++;
        end
        if (!fired[c]) begin
          check(ones == 0, $sformatf("event %0d ch %0d silent but %0d ones", e, c, ones));
          check(tot_seen_valid && tot_seen[c] == '0, $sformatf("event %0d ch %0d tot %0d", e, c, tot_seen[c]));
        end else begin
          check(ones == wid[c] / 2, $sformatf("event %0d ch %0d width %0d samples, exp %0d", e, c, ones, wid[c] / 2));
          check(contiguous, $sformatf("event %0d ch %0d pulse split", e, c));
          check(tot_seen_valid && int'(tot_seen[c]) == wid[c] / 2,
                $sformatf("event %0d ch %0d tot %0d, exp %0d", e, c, tot_seen[c], wid[c] / 2));
          k0 = first - off[c] / 2;
          if (kref == -1000) kref = k0;
          check(k0 == kref, $sformatf("event %0d ch %0d offset %0d vs %0d", e, c, k0, kref));
          if (off[c] < 0 && first >= 0) n_pretrig++;
          if (c >= 8 && ones > 0) n_byte1++;
        end
      end
      k_min = (kref < k_min) ? kref : k_min;
      k_max = (kref > k_max) ? kref : k_max;
      check(kref >= 29 && kref <= 42, $sformatf("event %0d trigger alignment %0d samples", e, kref));
      // the slave's window, forwarded by the master, follows
      same = 1;
      for (int k = 0; k < int'(WS); k++)
        for (int b = 0; b < int'(BYTES); b++) begin
          logic [7:0] v;
          v = rx_q.pop_front();
          for (int i = 0; i < 8; i++) if (8 * b + i < int'(CH) && win[k][8 * b + i] != v[i]) same = 0;
        end
      check(same, $sformatf("event %0d slave window equals master window", e));
      if (same) n_forwarded++;
      // the dead-time triggers must not have produced data
      repeat (CPB * 10 * 4) @(posedge clk_50);
      check(!busy && !s_busy && rx_q.size() == 0, $sformatf("event %0d: idle with no extra data", e));
    end
    check(n_windows == int'(EVENTS), "all windows received");
    check(n_pretrig > 0,  $sformatf("pulse before trigger recovered %0d times", n_pretrig));
    check(n_byte1 > 0,    $sformatf("second-byte hits %0d", n_byte1));
    check(n_ignored == 2 * int'(EVENTS), $sformatf("ignored triggers %0d", n_ignored));
    check(n_tot == int'(EVENTS), $sformatf("TOT results %0d", n_tot));
    check(n_forwarded == int'(EVENTS), $sformatf("forwarded slave events %0d", n_forwarded));
    $display("alignment K from %0d to %0d samples", k_min, k_max);
    $display("mechanisms: windows=%0d pretrigger=%0d byte1=%0d ignored=%0d tot=%0d forwarded=%0d",
             n_windows, n_pretrig, n_byte1, n_ignored, n_tot, n_forwarded);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
