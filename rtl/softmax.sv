// Softmax over the O class scores of the classifier.
//
//   p_k = exp(z_k - max z) / sum_j exp(z_j - max z)
// The exponentials come from a 1024-entry ROM covering [-16, 0] in steps of
// 1/64 (entry k = round(2^16 * exp((k - 1023)/64))); arguments below -16 read
// as zero. The sum is formed in one cycle and the O quotients are computed one
// per cycle by a single divider. Output probabilities are in the 16-bit Q6.10
// format. Latency from accepting the scores to out_valid: O + 3 cycles.
// The paper gives only that a softmax follows the dense layer; the table,
// the max subtraction and the sequential division are this design's choices.
module softmax
  import brnn_pkg::*;
#(
  parameter int O = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_vec [O],
  input  logic  in_last,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_vec [O],
  output logic  out_last
);
  localparam int OW = $clog2(O + 1);
  typedef enum logic [2:0] {X_IDLE, X_EXP, X_SUM, X_DIV, X_OUT} xstate_e;
  xstate_e state;

  logic [16:0] rom [1024];
  initial begin
    for (int k = 0; k < 1024; k++)
      rom[k] = 17'($rtoi($exp(real'(k - 1023) / 64.0) * 65536.0 + 0.5));
  end

  data_t       z  [O];
  logic [9:0]  idx [O];
  logic [16:0] e  [O];
  logic [31:0] sum;
  logic [OW-1:0] k;
  logic        l_q;
  data_t       zmax;

  always_comb begin
    zmax = z[0];
    for (int o = 1; o < O; o++) if (z[o] > zmax) zmax = z[o];
    for (int o = 0; o < O; o++) begin
      logic signed [31:0] d;
      d = (32'(z[o]) - 32'(zmax)) >>> (FRAC - 6);   // steps of 1/64, <= 0
      idx[o] = (d < -32'sd1023) ? 10'd0 : 10'(d + 32'sd1023);
    end
  end

  assign in_ready = (state == X_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= X_IDLE;
      out_valid <= 1'b0;
      out_last  <= 1'b0;
      sum <= '0;
      k   <= '0;
      l_q <= 1'b0;
      for (int o = 0; o < O; o++) begin
        z[o] <= '0; e[o] <= '0; out_vec[o] <= '0;
      end
    end else begin
      unique case (state)
        X_IDLE: if (in_valid) begin
          z     <= in_vec;
          l_q   <= in_last;
          state <= X_EXP;
        end
        X_EXP: begin
          for (int o = 0; o < O; o++) e[o] <= rom[idx[o]];
          state <= X_SUM;
        end
        X_SUM: begin
          logic [31:0] s;
          s = '0;
          for (int o = 0; o < O; o++) s = s + 32'(e[o]);
          sum   <= s;
          k     <= '0;
          state <= X_DIV;
        end
        X_DIV: begin
          for (int o = 0; o < O; o++)
            if (OW'(o) == k) out_vec[o] <= data_t'((48'(e[o]) << FRAC) / 48'(sum));
          k <= k + 1'b1;
          if (k == OW'(O - 1)) begin
            out_valid <= 1'b1;
            out_last  <= l_q;
            state     <= X_OUT;
          end
        end
        X_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          state     <= X_IDLE;
        end
        default: state <= X_IDLE;
      endcase
    end
  end
endmodule
