// Repeat unit between the encoder and the decoder of the recurrent
// autoencoder.
//
// The encoder streams one hidden state per time step; only the last one of a
// pass (in_last) is the bottleneck encoding h_T. The unit drops the others,
// caches h_T, and then offers it T times on its output, marking the first and
// the T-th copy with out_first/out_last, so that the decoder sees a sequence of
// length T. While it replays, it keeps consuming the encoder's stream, so the
// encoder can already run the next Monte Carlo pass (sample-wise pipelining);
// the next pass's encoding waits in a one-entry pending register, and the
// input blocks only while that register is occupied. Caching the encoding for
// T steps follows the paper; the pending register and the handshake are this
// design's choices.
module repeat_unit
  import brnn_pkg::*;
#(
  parameter int N = 8,
  parameter int T = 140
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  data_t in_vec [N],
  input  logic  in_last,
  output logic  out_valid,
  input  logic  out_ready,
  output data_t out_vec [N],
  output logic  out_first,
  output logic  out_last
);
  localparam int TW = $clog2(T + 1);
  logic [TW-1:0] cnt;
  logic          pend_valid;
  data_t         pend [N];

  assign in_ready  = !pend_valid;
  assign out_first = (cnt == '0);
  assign out_last  = (cnt == TW'(T - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      cnt       <= '0;
      for (int n = 0; n < N; n++) out_vec[n] <= '0;
      pend_valid <= 1'b0;
      for (int n = 0; n < N; n++) pend[n] <= '0;
    end else begin
      if (!out_valid) begin
        if (pend_valid) begin
          out_vec    <= pend;
          out_valid  <= 1'b1;
          pend_valid <= 1'b0;
        end else if (in_valid && in_last) begin
          out_vec   <= in_vec;
          out_valid <= 1'b1;
        end
        cnt <= '0;
      end else begin
        if (out_ready) begin
          if (out_last) out_valid <= 1'b0;
          cnt <= out_last ? '0 : cnt + 1'b1;
        end
        if (in_valid && in_ready && in_last) begin
          pend       <= in_vec;
          pend_valid <= 1'b1;
        end
      end
    end
  end
endmodule
