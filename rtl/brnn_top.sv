// Bayesian LSTM accelerator: a fully unrolled, layer-pipelined network of
// LSTM engines with Monte Carlo dropout, in one of two architectures.
//
// ARCH_AUTOENCODER (default, anomaly detection): NL encoder layers, a repeat
// unit, NL decoder layers and a temporal dense layer. Layer sizes:
//   encoder layer 0: I -> H, middle layers H -> H, last encoder layer H -> H/2
//   decoder layer 0: H/2 -> H, other decoder layers H -> H
//   temporal dense:  H -> O (O = I, the reconstruction) at every time step.
// ARCH_CLASSIFIER: NL layers (I -> H, H -> H, ...), then a dense layer on the
// last hidden state h_T (H -> O classes) and a softmax.
// Bit l of B makes layer l Bayesian (layers numbered from the input, encoder
// first); the default 8'b0000_0101 is the paper's Y N Y N.
//
// Every layer is its own engine and the layers are chained by valid/ready
// streams of hidden states, so layer l+1 works on step t while layer l works
// on step t+1 (time-step pipelining). Each Bayesian engine's Bernoulli sampler
// prepares the masks of the next Monte Carlo pass while the engine computes
// the current one. The decoder can only start once the encoder has produced
// h_T, after which the repeat unit feeds the cached encoding for T steps.
//
// Interface: x_* is the input stream, one vector of I features per time step,
// with x_first/x_last marking the T steps of one Monte Carlo pass; the host
// sends the same sequence S times and averages the S outputs. y_* is the output
// stream: O values per time step (autoencoder) or O class probabilities per
// pass (classifier), y_last marking the end of a pass. cfg_* writes weights
// and biases: cfg_sel picks layer 0..L-1 or the dense layer (L); cfg_addr is
// the address within it (maps in lstm_layer and dense). stall_o/mask_load_o
// flag backpressure stalls and mask reads per layer.
// The architecture, layer sizes, defaults (T = 140, I = 1, H = 16, NL = 2,
// B = YNYN, RX = 16, RH = 5, RD = RX) follow the paper; the streaming
// protocol, configuration bus and the per-layer seeds are this design's.
module brnn_top
  import brnn_pkg::*;
#(
  parameter arch_e        ARCH = ARCH_AUTOENCODER,
  parameter int           T    = 140,
  parameter int           I    = 1,
  parameter int           H    = 16,
  parameter int           NL   = 2,
  parameter logic [7:0]   B    = 8'b0000_0101,
  parameter int           RX   = 16,
  parameter int           RH   = 5,
  parameter int           RD   = 16,
  parameter int           O    = (ARCH == ARCH_AUTOENCODER) ? I : 4,
  parameter logic [127:0] SEED = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210,
  localparam int          L    = (ARCH == ARCH_AUTOENCODER) ? 2*NL : NL,
  localparam int          HM   = (I > H) ? I : H
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cfg_we,
  input  logic [3:0]  cfg_sel,
  input  logic [15:0] cfg_addr,
  input  data_t       cfg_data,
  input  logic        x_valid,
  output logic        x_ready,
  input  data_t       x_vec [I],
  input  logic        x_first,
  input  logic        x_last,
  output logic        y_valid,
  input  logic        y_ready,
  output data_t       y_vec [O],
  output logic        y_last,
  output logic [L-1:0] stall_o,
  output logic [L-1:0] mask_load_o
);
  function automatic int in_dim(int l);
    if (l == 0) return I;
    if (ARCH == ARCH_AUTOENCODER && l == NL) return H/2;
    return H;
  endfunction
  function automatic int out_dim(int l);
    if (ARCH == ARCH_AUTOENCODER && l == NL-1) return H/2;
    return H;
  endfunction

  // Stream into each layer (li_*) and out of each layer (lo_*), HM wide.
  logic  li_valid [L], li_ready [L], li_first [L], li_last [L];
  data_t li_vec   [L][HM];
  logic  lo_valid [L], lo_ready [L], lo_first [L], lo_last [L];
  data_t lo_vec   [L][HM];

  // Head of the chain is the input stream.
  assign li_valid[0] = x_valid;
  assign li_first[0] = x_first;
  assign li_last[0]  = x_last;
  assign x_ready     = li_ready[0];
  always_comb begin
    for (int n = 0; n < HM; n++) li_vec[0][n] = (n < I) ? x_vec[n] : '0;
  end

  for (genvar l = 0; l < L; l++) begin : g_layer
    localparam int LI = in_dim(l);
    localparam int LH = out_dim(l);
    localparam int NC = 4*LI*LH + 4*LH*LH + 4*LH;
    localparam int CW = $clog2(NC);
    data_t lin  [LI];
    data_t lout [LH];

    always_comb begin
      for (int n = 0; n < LI; n++) lin[n] = li_vec[l][n];
      for (int n = 0; n < HM; n++) lo_vec[l][n] = (n < LH) ? lout[n] : '0;
    end

    lstm_layer #(
      .I(LI), .H(LH), .RX(RX), .RH(RH), .BAYES(B[l]),
      .SEED(SEED ^ {16{8'(8'h11 * (l + 1))}})
    ) u_layer (
      .clk, .rst_n,
      .cfg_we  (cfg_we && cfg_sel == 4'(l)),
      .cfg_addr(cfg_addr[CW-1:0]),
      .cfg_data,
      .in_valid(li_valid[l]), .in_ready(li_ready[l]), .in_vec(lin),
      .in_first(li_first[l]), .in_last(li_last[l]),
      .out_valid(lo_valid[l]), .out_ready(lo_ready[l]), .out_vec(lout),
      .out_first(lo_first[l]), .out_last(lo_last[l]),
      .stall_o(stall_o[l]), .mask_load_o(mask_load_o[l])
    );

    // Link to the next layer: direct, or through the repeat unit between
    // the encoder and the decoder of the autoencoder.
    if (l + 1 < L) begin : g_link
      if (ARCH == ARCH_AUTOENCODER && l + 1 == NL) begin : g_repeat
        data_t enc  [H/2];
        data_t rep  [H/2];
        always_comb begin
          for (int n = 0; n < H/2; n++) enc[n] = lo_vec[l][n];
          for (int n = 0; n < HM; n++) li_vec[l+1][n] = (n < H/2) ? rep[n] : '0;
        end
        repeat_unit #(.N(H/2), .T(T)) u_repeat (
          .clk, .rst_n,
          .in_valid(lo_valid[l]), .in_ready(lo_ready[l]), .in_vec(enc), .in_last(lo_last[l]),
          .out_valid(li_valid[l+1]), .out_ready(li_ready[l+1]), .out_vec(rep),
          .out_first(li_first[l+1]), .out_last(li_last[l+1])
        );
      end else begin : g_direct
        assign li_valid[l+1] = lo_valid[l];
        assign li_first[l+1] = lo_first[l];
        assign li_last[l+1]  = lo_last[l];
        assign lo_ready[l]   = li_ready[l+1];
        assign li_vec[l+1]   = lo_vec[l];
      end
    end
  end

  // Output head.
  localparam int DC  = O*H + O;
  localparam int DCW = $clog2(DC);
  data_t hl [H];
  always_comb for (int n = 0; n < H; n++) hl[n] = lo_vec[L-1][n];

  if (ARCH == ARCH_AUTOENCODER) begin : g_ae_head
    logic unused_first;
    dense #(.N(H), .O(O), .RD(RD), .LAST_ONLY(1'b0)) u_dense (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_sel == 4'(L)), .cfg_addr(cfg_addr[DCW-1:0]), .cfg_data,
      .in_valid(lo_valid[L-1]), .in_ready(lo_ready[L-1]), .in_vec(hl),
      .in_first(lo_first[L-1]), .in_last(lo_last[L-1]),
      .out_valid(y_valid), .out_ready(y_ready), .out_vec(y_vec),
      .out_first(unused_first), .out_last(y_last)
    );
  end else begin : g_cls_head
    logic  d_valid, d_ready, d_first, d_last;
    data_t logits [O];
    dense #(.N(H), .O(O), .RD(RD), .LAST_ONLY(1'b1)) u_dense (
      .clk, .rst_n,
      .cfg_we(cfg_we && cfg_sel == 4'(L)), .cfg_addr(cfg_addr[DCW-1:0]), .cfg_data,
      .in_valid(lo_valid[L-1]), .in_ready(lo_ready[L-1]), .in_vec(hl),
      .in_first(lo_first[L-1]), .in_last(lo_last[L-1]),
      .out_valid(d_valid), .out_ready(d_ready), .out_vec(logits),
      .out_first(d_first), .out_last(d_last)
    );
    softmax #(.O(O)) u_softmax (
      .clk, .rst_n,
      .in_valid(d_valid), .in_ready(d_ready), .in_vec(logits), .in_last(d_last),
      .out_valid(y_valid), .out_ready(y_ready), .out_vec(y_vec), .out_last(y_last)
    );
  end

  initial begin
    assert (L <= 15) else $error("brnn_top: at most 15 LSTM layers");
    assert (ARCH == ARCH_CLASSIFIER || H % 2 == 0) else $error("brnn_top: H must be even");
  end
endmodule
