// DX (demultiplexer) unit: decomposes one vector into four gate copies and
// applies the Monte Carlo dropout masks.
//
// Each of the four LSTM gates (i, f, g, o) gets its own copy of the input x_t
// (or of the hidden state h_{t-1}); feature n of the copy for gate q passes
// when mask[q][n] is 1 and is replaced by zero otherwise. With bayes_en low
// every feature passes. Purely combinational. The decomposition and the
// masking follow the paper; masked features are not rescaled by 1/(1-p)
// (this design's choice: the factor can be folded into the trained weights).
module dx
  import brnn_pkg::*;
#(
  parameter int N = 16
) (
  input  data_t        vec      [N],
  input  logic [N-1:0] mask     [4],
  input  logic         bayes_en,
  output data_t        gate_vec [4][N]
);
  always_comb begin
    for (int q = 0; q < 4; q++)
      for (int n = 0; n < N; n++)
        gate_vec[q][n] = (!bayes_en || mask[q][n]) ? vec[n] : '0;
  end
endmodule
