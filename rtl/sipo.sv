// Serial-in parallel-out register for dropout mask bits.
//
// One bit is accepted per cycle while in_valid is high and no finished word is
// waiting. The k-th bit of a word lands in bit k. After len bits the word is
// offered on out_word with out_valid, and held until out_ready; the next word
// starts in the cycle after it is taken. len may change from word to word, so
// one SIPO can pack both I-bit (input) and H-bit (hidden state) masks; bits
// above len are zero. The paper gives the SIPO's place and its 1-bit input
// and I/H-bit output; the handshake is this design's choice.
module sipo #(
  parameter int W = 16,
  localparam int LW = $clog2(W + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic          in_bit,
  output logic          in_ready,
  input  logic [LW-1:0] len,
  output logic          out_valid,
  input  logic          out_ready,
  output logic [W-1:0]  out_word
);
  logic [LW-1:0] cnt;

  assign in_ready = !out_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt       <= '0;
      out_valid <= 1'b0;
      out_word  <= '0;
    end else if (out_valid) begin
      if (out_ready) begin
        out_valid <= 1'b0;
        out_word  <= '0;
        cnt       <= '0;
      end
    end else if (in_valid) begin
      for (int b = 0; b < W; b++) if (LW'(b) == cnt) out_word[b] <= in_bit;
      if (cnt + 1'b1 == len) out_valid <= 1'b1;
      cnt <= cnt + 1'b1;
    end
  end
endmodule
