// Dense (fully connected) output layer: y = W h + b, built from one MVM unit.
//
// Used in two ways. As the temporal dense layer of the autoencoder
// (LAST_ONLY = 0) the same unit processes the hidden state of every time step
// and produces one reconstruction vector per step. In the classifier
// (LAST_ONLY = 1) it consumes every step but only computes on the last hidden
// state h_T of a pass. The MVM has reuse factor RD. Output is saturated to the
// 16-bit format and held on a valid/ready stream with first/last flags.
// Weights [row*N + col] and biases [O*N + row] are written through cfg_*.
// Latency from accepting h to out_valid: ceil(O*N / ceil(O*N/RD)) + 3 cycles.
// Following the paper the dense layer is a single MVM unit; reusing one unit
// for all T time steps (instead of T copies) is this design's choice.
module dense
  import brnn_pkg::*;
#(
  parameter int N         = 16,
  parameter int O         = 1,
  parameter int RD        = 16,
  parameter bit LAST_ONLY = 1'b0,
  localparam int NCFG     = O*N + O,
  localparam int CAW      = $clog2(NCFG)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           cfg_we,
  input  logic [CAW-1:0] cfg_addr,
  input  data_t          cfg_data,
  input  logic           in_valid,
  output logic           in_ready,
  input  data_t          in_vec [N],
  input  logic           in_first,
  input  logic           in_last,
  output logic           out_valid,
  input  logic           out_ready,
  output data_t          out_vec [O],
  output logic           out_first,
  output logic           out_last
);
  localparam int WAW = $clog2(O*N) > 0 ? $clog2(O*N) : 1;
  typedef enum logic [1:0] {D_IDLE, D_START, D_RUN, D_OUT} dstate_e;
  dstate_e state;

  data_t bias [O];
  data_t vreg [N];
  acc_t  y    [O];
  logic  done, busy, f_q, l_q;

  mvm #(.N(N), .H(O), .R(RD)) u_mvm (
    .clk, .rst_n,
    .w_we  (cfg_we && int'(cfg_addr) < O*N),
    .w_addr(WAW'(cfg_addr)),
    .w_data(cfg_data),
    .start (state == D_START), .vec(vreg), .busy, .done, .y
  );

  always_ff @(posedge clk) begin
    if (cfg_we && int'(cfg_addr) >= O*N) bias[int'(cfg_addr) - O*N] <= cfg_data;
  end
  initial for (int o = 0; o < O; o++) bias[o] = '0;

  assign in_ready = (state == D_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= D_IDLE;
      out_valid <= 1'b0;
      out_first <= 1'b0;
      out_last  <= 1'b0;
      f_q <= 1'b0;
      l_q <= 1'b0;
      for (int n = 0; n < N; n++) vreg[n] <= '0;
      for (int o = 0; o < O; o++) out_vec[o] <= '0;
    end else begin
      unique case (state)
        D_IDLE: if (in_valid && (!LAST_ONLY || in_last)) begin
          vreg  <= in_vec;
          f_q   <= in_first;
          l_q   <= in_last;
          state <= D_START;
        end
        D_START: state <= D_RUN;
        D_RUN: if (done) begin
          for (int o = 0; o < O; o++) out_vec[o] <= sat_data(y[o] + (acc_t'(bias[o]) <<< FRAC));
          out_first <= LAST_ONLY ? 1'b1 : f_q;
          out_last  <= l_q;
          out_valid <= 1'b1;
          state     <= D_OUT;
        end
        D_OUT: if (out_ready) begin
          out_valid <= 1'b0;
          state     <= D_IDLE;
        end
        default: state <= D_IDLE;
      endcase
    end
  end

  logic unused_ok;
  assign unused_ok = busy;
endmodule
