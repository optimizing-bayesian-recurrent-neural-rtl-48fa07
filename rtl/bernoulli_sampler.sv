// Bernoulli sampler: produces the Monte Carlo dropout masks of one LSTM layer.
//
// Three 128-bit LFSRs each give a bit that is 1 with probability 1/2. A
// three-input NAND of the three bits is 0 with probability 1/8, so the output
// bit is a keep-mask bit z ~ Bernoulli(1 - p) with dropout probability
// p = 0.125. A SIPO packs these bits into words and a FIFO buffers them.
// One mask set (one Monte Carlo sample) is eight words, in this order:
// the input masks of gates i, f, g, o (I bits each), then the hidden-state
// masks of gates i, f, g, o (H bits each). With FIFO_DEPTH = 8 the sampler
// pre-samples exactly the masks of the next sample, and it runs ahead of the
// LSTM engine while the engine computes, so sampling is hidden behind compute.
// The LFSR/NAND/SIPO/FIFO chain and p = 0.125 follow the paper; the word order,
// the FIFO depth and the seeds are this design's choices.
// Interface: valid_o/word_o show the next mask word, pop consumes it.
// Timing: one mask bit per cycle; a set takes 4*I + 4*H cycles plus a few.
module bernoulli_sampler #(
  parameter int           I          = 1,
  parameter int           H          = 16,
  parameter int           FIFO_DEPTH = 8,
  parameter logic [127:0] SEED       = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210,
  localparam int          W          = (I > H) ? I : H
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         pop,
  output logic [W-1:0] word_o,
  output logic         valid_o
);
  localparam int LW = $clog2(W + 1);

  logic [2:0]    lb;
  logic          bit_ready, z;
  logic          sipo_valid, fifo_full, fifo_empty;
  logic [W-1:0]  sipo_word;
  logic [2:0]    widx;          // word index within one mask set
  logic [LW-1:0] len;

  for (genvar k = 0; k < 3; k++) begin : g_lfsr
    lfsr #(.WIDTH(128), .SEED(SEED ^ {32{4'(k + 1)}})) u_lfsr (
      .clk, .rst_n, .en(bit_ready), .bit_o(lb[k])
    );
  end

  // Extra logic: 3-input NAND, zero with probability 1/8.
  assign z   = ~(lb[0] & lb[1] & lb[2]);
  assign len = (widx < 3'd4) ? LW'(I) : LW'(H);

  sipo #(.W(W)) u_sipo (
    .clk, .rst_n,
    .in_valid (1'b1),
    .in_bit   (z),
    .in_ready (bit_ready),
    .len,
    .out_valid(sipo_valid),
    .out_ready(!fifo_full),
    .out_word (sipo_word)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                        widx <= '0;
    else if (sipo_valid && !fifo_full) widx <= widx + 1'b1;
  end

  mask_fifo #(.W(W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .push (sipo_valid),
    .din  (sipo_word),
    .pop,
    .dout (word_o),
    .full (fifo_full),
    .empty(fifo_empty)
  );

  assign valid_o = !fifo_empty;
endmodule
