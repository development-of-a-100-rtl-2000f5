// sync_2ff: two-flop synchroniser for a slow level crossing clock domains.
// Output follows the input two clk edges later. Used for enables and the
// White Rabbit time-sync level; not for multi-bit values.
module sync_2ff (
  input  logic clk,
  input  logic d,
  output logic q
);
  logic meta;
  always_ff @(posedge clk) begin
    meta <= d;
    q    <= meta;
  end
endmodule
