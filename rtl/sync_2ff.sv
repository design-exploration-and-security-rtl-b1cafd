// sync_2ff: two-flip-flop synchroniser for one level signal entering the
// clk domain. The output follows the input after two to three clk edges.
// Reset (asynchronous, active low) clears both stages.
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
