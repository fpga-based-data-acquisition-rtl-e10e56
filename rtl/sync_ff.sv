// sync_ff: two-flop synchroniser for a single-bit level crossing into the
// clock domain of clk. The output follows the input two rising edges later.
// Reset clears both flops. Used for the muon trigger, the save-window request
// and the FIFO Gray pointers (one instance per bit). Not described in the
// published design; standard practice for its asynchronous inputs.
module sync_ff #(
  parameter int unsigned WIDTH = 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [WIDTH-1:0] d,
  output logic [WIDTH-1:0] q
);
  logic [WIDTH-1:0] meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
