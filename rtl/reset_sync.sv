// reset_sync: asynchronous-assert, synchronous-release reset for one clock
// domain. rst_n_out goes low at once with rst_n_in and returns high two
// rising edges of clk after rst_n_in is released. The board reset and its
// distribution are not described in the published design; this is the usual
// structure for a design with two clock domains.
module reset_sync (
  input  logic clk,
  input  logic rst_n_in,
  output logic rst_n_out
);
  logic stage;

  always_ff @(posedge clk or negedge rst_n_in) begin
    if (!rst_n_in) begin
      stage     <= 1'b0;
      rst_n_out <= 1'b0;
    end else begin
      stage     <= 1'b1;
      rst_n_out <= stage;
    end
  end
endmodule
