// LSTM tail: the element-wise part of one LSTM time step.
//
//   c_t = f (.) c_{t-1} + i (.) g        (32-bit cell state, 2*FRAC fraction)
//   h_t = o (.) tanh(c_t)                (16-bit, FRAC fraction)
// for H features in parallel. Three register stages: (1) cell update,
// (2) tanh lookup of c_t, (3) output multiply. in_valid starts a step;
// out_valid pulses three cycles later with c_o and h_o, which then hold.
// The equations and the 32-bit cell state follow the paper; the staging and
// the saturation at the format limits are this design's choices.
module lstm_tail
  import brnn_pkg::*;
#(
  parameter int H = 16
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  data_t gi     [H],
  input  data_t gf     [H],
  input  data_t gg     [H],
  input  data_t go     [H],
  input  cell_t c_prev [H],
  output logic  out_valid,
  output cell_t c_o    [H],
  output data_t h_o    [H]
);
  logic  v1, v2;
  data_t o1 [H];
  data_t o2 [H];
  data_t tc [H];

  for (genvar h = 0; h < H; h++) begin : g_tanh
    act_lut #(.FUNC(ACT_TANH)) u_tanh (.clk, .x(acc_t'(c_o[h])), .y(tc[h]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      v2 <= 1'b0;
      out_valid <= 1'b0;
      for (int h = 0; h < H; h++) begin
        c_o[h] <= '0; h_o[h] <= '0; o1[h] <= '0; o2[h] <= '0;
      end
    end else begin
      v1 <= in_valid;
      v2 <= v1;
      out_valid <= v2;
      for (int h = 0; h < H; h++) begin
        if (in_valid) begin
          c_o[h] <= sat_cell(((64'(gf[h]) * 64'(c_prev[h])) >>> FRAC) + 64'(gi[h]) * 64'(gg[h]));
          o1[h]  <= go[h];
        end
        o2[h] <= o1[h];
        if (v2) h_o[h] <= sat_data(acc_t'(o2[h]) * acc_t'(tc[h]));
      end
    end
  end
endmodule
