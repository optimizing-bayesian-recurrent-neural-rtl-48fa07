// Activation function lookup table (sigmoid or tanh).
//
// A ROM of LUT_SIZE precomputed values, as a block RAM would hold them; the
// input (2*FRAC fractional bits) is scaled to a table index covering [-8, 8)
// in steps of 1/64 and saturates outside that range. The read is registered:
// y shows the value for the x of the previous cycle. The table contents are
// computed at elaboration by brnn_pkg::act_entry (formula in brnn_pkg).
// Implementing the activations as ROM tables follows the paper; the table
// size and range are this design's choices.
module act_lut
  import brnn_pkg::*;
#(
  parameter act_e FUNC = ACT_SIGMOID
) (
  input  logic clk,
  input  acc_t x,
  output data_t y
);
  data_t rom [LUT_SIZE];

  initial begin
    for (int k = 0; k < LUT_SIZE; k++) rom[k] = act_entry(FUNC, k);
  end

  always_ff @(posedge clk) y <= rom[lut_index(64'(x))];
endmodule
