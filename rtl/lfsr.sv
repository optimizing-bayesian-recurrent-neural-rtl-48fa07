// 128-bit, 4-tap Fibonacci linear feedback shift register.
//
// The register R0..R127 shifts by one position per enabled cycle (R0 -> R1 ->
// ... -> R127); R0 takes the XOR of the four taps R102, R121, R126 and R127.
// bit_o is R127, a pseudo-random bit that is 1 with probability 1/2.
// The width, the placement of the feedback into R0 and the taps R102, R121 and
// R127 follow the paper; the fourth tap (R126) and the seed are this design's
// choices. Reset loads SEED, which must be nonzero.
// Timing: one new bit per cycle while en is high.
module lfsr #(
  parameter int               WIDTH = 128,
  parameter logic [WIDTH-1:0] SEED  = {4{32'hACE1_2468}}
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  output logic bit_o
);
  logic [WIDTH-1:0] r;
  logic             fb;

  assign fb    = r[102] ^ r[121] ^ r[126] ^ r[WIDTH-1];
  assign bit_o = r[WIDTH-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  r <= SEED;
    else if (en) r <= {r[WIDTH-2:0], fb};
  end

  initial assert (SEED != '0) else $error("lfsr: SEED must be nonzero");
endmodule
