// Matrix-vector multiplication unit with a reuse factor.
//
// Computes y = W * v for an H x N weight matrix held in on-chip registers.
// The H*N products are numbered k = row*N + col. With reuse factor R the unit
// has M = ceil(H*N / R) multipliers; in compute cycle c multiplier m forms
// product k = c*M + m and adds it into the accumulator of row k / N. The
// result is therefore ready after C = ceil(H*N / M) compute cycles, so a larger
// R trades multipliers (DSP blocks) for cycles, as the paper's reuse factor
// does. Products are exact (16x16 -> 32 bits) and are summed in ACC_W bits at
// 2*FRAC fractional bits.
// Interface: weights are written one at a time through w_we/w_addr/w_data
// (address row*N + col). start latches vec and clears the accumulators;
// done pulses for one cycle C+1 cycles later, and y holds the result until the
// next start. start is ignored while busy.
// The reuse-factor sizing follows the paper; the product schedule and the
// weight write port are this design's choices (the paper fixes the weights as
// constants at synthesis).
module mvm
  import brnn_pkg::*;
#(
  parameter int N = 16,
  parameter int H = 16,
  parameter int R = 5,
  localparam int P  = N * H,
  localparam int M  = (P + R - 1) / R,
  localparam int C  = (P + M - 1) / M,
  localparam int AW = (P > 1) ? $clog2(P) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          w_we,
  input  logic [AW-1:0] w_addr,
  input  data_t         w_data,
  input  logic          start,
  input  data_t         vec  [N],
  output logic          busy,
  output logic          done,
  output acc_t          y    [H]
);
  localparam int CW = $clog2(C + 1);

  data_t         w    [P];
  data_t         vreg [N];
  acc_t          acc_n [H];
  logic [CW-1:0] cyc;

  always_ff @(posedge clk) begin
    if (w_we) w[w_addr] <= w_data;
  end
  initial for (int k = 0; k < P; k++) w[k] = '0;

  always_comb begin
    acc_n = y;
    for (int m = 0; m < M; m++) begin
      int k;
      k = int'(cyc) * M + m;
      if (k < P)
        acc_n[k / N] = acc_n[k / N] + acc_t'(w[k]) * acc_t'(vreg[k % N]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      cyc  <= '0;
      for (int h = 0; h < H; h++) y[h] <= '0;
      for (int n = 0; n < N; n++) vreg[n] <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          cyc  <= '0;
          vreg <= vec;
          for (int h = 0; h < H; h++) y[h] <= '0;
        end
      end else begin
        y <= acc_n;
        if (cyc == CW'(C - 1)) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
        cyc <= cyc + 1'b1;
      end
    end
  end
endmodule
