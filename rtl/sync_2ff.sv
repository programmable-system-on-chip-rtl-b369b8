// sync_2ff -- two-flop synchroniser for a slowly changing level.
//
// Brings an asynchronous single-bit level into the clk domain; the output
// follows the input two to three clock edges later. Resets to 0.
module sync_2ff (
  input  logic clk,
  input  logic rst_n,
  input  logic d,
  output logic q
);

  logic meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= 1'b0;
      q    <= 1'b0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end

endmodule
