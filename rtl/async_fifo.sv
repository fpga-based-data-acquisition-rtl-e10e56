// async_fifo: dual-clock FIFO with Gray-coded pointers.
//
// Words are written on wclk and read on rclk; the two clocks need no phase
// relation. Each side keeps a binary pointer one bit wider than the address
// and passes its Gray-coded copy through a two-flop synchroniser to the other
// side, which compares it with its own pointer to derive full or empty.
// Full and empty are conservative: they can stay asserted for two cycles of
// the far clock after the condition has cleared.
//
// Write side: a word is stored when wr_en is high and full is low; a write
// while full is dropped and pulses wr_drop. Read side: rd_en while not empty
// pops one word, which appears on rd_data with rd_valid one rclk cycle later.
// The memory is a plain array so that synthesis can map it to block RAM.
// This structure is this design's choice; the published design only says a
// FIFO memory clocked at 500 MHz holds the window.
module async_fifo #(
  parameter int unsigned WIDTH = 16,
  parameter int unsigned DEPTH = 256
) (
  input  logic             wclk,
  input  logic             wrst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  output logic             full,
  output logic             wr_drop,
  input  logic             rclk,
  input  logic             rrst_n,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             rd_valid,
  output logic             empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] wgray_in_r, rgray_in_w;
  logic [AW:0] wbin_next, rbin_next;
  logic        do_write, do_read;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---- write side ----
  assign do_write  = wr_en && !full;
  assign wbin_next = wbin + (AW+1)'(do_write);

  always_ff @(posedge wclk or negedge wrst_n) begin
    if (!wrst_n) begin
      wbin    <= '0;
      wgray   <= '0;
      full    <= 1'b0;
      wr_drop <= 1'b0;
    end else begin
      wbin    <= wbin_next;
      wgray   <= bin2gray(wbin_next);
      full    <= (bin2gray(wbin_next) == {~rgray_in_w[AW:AW-1], rgray_in_w[AW-2:0]});
      wr_drop <= wr_en && full;
    end
  end

  always_ff @(posedge wclk) begin
    if (do_write) mem[wbin[AW-1:0]] <= wr_data;
  end

  sync_ff #(.WIDTH(AW+1)) u_sync_r2w (
    .clk(wclk), .rst_n(wrst_n), .d(rgray), .q(rgray_in_w)
  );

  // ---- read side ----
  assign do_read   = rd_en && !empty;
  assign rbin_next = rbin + (AW+1)'(do_read);

  always_ff @(posedge rclk or negedge rrst_n) begin
    if (!rrst_n) begin
      rbin     <= '0;
      rgray    <= '0;
      empty    <= 1'b1;
      rd_valid <= 1'b0;
      rd_data  <= '0;
    end else begin
      rbin     <= rbin_next;
      rgray    <= bin2gray(rbin_next);
      empty    <= (bin2gray(rbin_next) == wgray_in_r);
      rd_valid <= do_read;
      if (do_read) rd_data <= mem[rbin[AW-1:0]];
    end
  end

  sync_ff #(.WIDTH(AW+1)) u_sync_w2r (
    .clk(rclk), .rst_n(rrst_n), .d(wgray), .q(wgray_in_r)
  );

  initial begin
    assert (DEPTH >= 4 && (1 << AW) == DEPTH)
      else $error("async_fifo: DEPTH must be a power of two, at least 4");
  end
endmodule
