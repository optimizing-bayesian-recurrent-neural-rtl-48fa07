// Drives one brnn_top configuration end to end: writes random weights into
// every layer and the dense layer, streams S Monte Carlo passes of one input
// sequence, and compares every output bit exactly with a reference model of
// the whole network (layers, masks regenerated from the per-layer seeds,
// repeat, dense, softmax). It also counts the mechanisms of the design:
// backpressure stalls, mask-set reads, mask sets read on eight consecutive
// cycles (sampling hidden behind compute), steps a layer started before the
// layer in front of it had finished the pass (time-step pipelining), and
// decoder steps fed by the repeat unit.
module top_harness
  import brnn_pkg::*;
  import brnn_ref_pkg::*;
#(
  parameter arch_e      ARCH = ARCH_AUTOENCODER,
  parameter int         T = 6, parameter int I = 2, parameter int H = 4, parameter int NL = 2,
  parameter logic [7:0] B = 8'b0101,
  parameter int         RX = 3, parameter int RH = 2, parameter int RD = 2,
  parameter int         S = 3,
  parameter bit         BACKPRESSURE = 1'b1,
  parameter bit         USE_DEFAULTS = 1'b0
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   n_stall, output int n_mask_sets, output int n_hidden_sampling,
  output int   n_pipelined, output int n_repeat, output int cycles,
  output int   span            // cycles from the first input accepted to the last output
);
  localparam int L = (ARCH == ARCH_AUTOENCODER) ? 2*NL : NL;
  localparam int O = (ARCH == ARCH_AUTOENCODER) ? I : 4;
  localparam logic [127:0] SEED = 128'h0123_4567_89AB_CDEF_FEDC_BA98_7654_3210;

  logic rst_n = 1'b0, cfg_we = 1'b0;
  logic [3:0] cfg_sel = '0;
  logic [15:0] cfg_addr = '0;
  data_t cfg_data = '0;
  logic x_valid = 1'b0, x_ready, x_first = 1'b0, x_last = 1'b0;
  data_t x_vec [I];
  logic y_valid, y_ready = 1'b1, y_last;
  data_t y_vec [O];
  logic [L-1:0] stall, mload;
  logic l1_acc, dec_acc;

  if (USE_DEFAULTS) begin : g_dut
    brnn_top dut (.clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data,
      .x_valid, .x_ready, .x_vec, .x_first, .x_last,
      .y_valid, .y_ready, .y_vec, .y_last, .stall_o(stall), .mask_load_o(mload));
    assign l1_acc  = dut.li_valid[1] && dut.li_ready[1];
    assign dec_acc = dut.li_valid[NL] && dut.li_ready[NL];
  end else begin : g_dut_p
    brnn_top #(.ARCH(ARCH), .T(T), .I(I), .H(H), .NL(NL), .B(B), .RX(RX), .RH(RH), .RD(RD)) dut (
      .clk, .rst_n, .cfg_we, .cfg_sel, .cfg_addr, .cfg_data,
      .x_valid, .x_ready, .x_vec, .x_first, .x_last,
      .y_valid, .y_ready, .y_vec, .y_last, .stall_o(stall), .mask_load_o(mload));
    assign l1_acc  = dut.li_valid[1] && dut.li_ready[1];
    assign dec_acc = (NL < L) ? (dut.li_valid[NL] && dut.li_ready[NL]) : 1'b0;
  end

  function automatic int in_dim(int l);
    if (l == 0) return I;
    if (ARCH == ARCH_AUTOENCODER && l == NL) return H/2;
    return H;
  endfunction
  function automatic int out_dim(int l);
    if (ARCH == ARCH_AUTOENCODER && l == NL-1) return H/2;
    return H;
  endfunction

  layer_model lm [L];
  longint dw [];
  longint xs [T][];
  longint exp_y [$][];
  bit     exp_last [$];
  int     burst [L];
  bit     in_pass = 1'b0;
  int     t_start = -1;

  always @(posedge clk) if (rst_n) begin
    cycles <= cycles + 1;
    if (|stall) n_stall <= n_stall + 1;
    for (int l = 0; l < L; l++) begin
      if (mload[l]) begin
        burst[l] = burst[l] + 1;
        if (burst[l] == 8) n_hidden_sampling <= n_hidden_sampling + 1;
        if ((burst[l] % 8) == 0) n_mask_sets <= n_mask_sets + 1;
      end else if (burst[l] % 8 == 0) burst[l] = 0;
      else burst[l] = burst[l] + 8;   // a gap: words of the set still counted, but not "ahead"
    end
    if (x_valid && x_ready) in_pass <= !x_last;
    if (x_valid && x_ready && t_start < 0) t_start = cycles;
    if (y_valid && y_ready) span <= cycles - t_start + 1;
    if (l1_acc && (in_pass || (x_valid && !x_last))) n_pipelined <= n_pipelined + 1;
    if (ARCH == ARCH_AUTOENCODER && dec_acc) n_repeat <= n_repeat + 1;
    if (y_valid && y_ready) begin
      longint e[];
      e = exp_y.pop_front();
      checks <= checks + 1;
      for (int o = 0; o < O; o++)
        if (longint'(y_vec[o]) != e[o] || y_last != exp_last[0]) begin
          failures <= failures + 1;
          $display("ARCH=%0d output mismatch o=%0d got %0d exp %0d", ARCH, o, y_vec[o], e[o]);
          break;
        end
      void'(exp_last.pop_front());
    end
  end

  // Output backpressure: long stretches of y_ready low, so stalls reach the layers.
  always @(negedge clk) if (BACKPRESSURE) y_ready <= ((cycles % 64) < 16) && ($urandom_range(3) != 0);

  initial begin
    checks = 0; failures = 0; finished = 0; cycles = 0; span = 0;
    n_stall = 0; n_mask_sets = 0; n_hidden_sampling = 0; n_pipelined = 0; n_repeat = 0;
    foreach (burst[l]) burst[l] = 0;
    foreach (x_vec[n]) x_vec[n] = '0;
    for (int l = 0; l < L; l++) begin
      lm[l] = new(in_dim(l), out_dim(l), B[l], SEED ^ {16{8'(8'h11 * (l + 1))}});
      lm[l].randomize_weights(300);
    end
    dw = new[O*H + O];
    foreach (dw[a]) dw[a] = longint'($urandom_range(1200)) - 600;
    for (int t = 0; t < T; t++) begin
      xs[t] = new[I];
      foreach (xs[t][n]) xs[t][n] = longint'($urandom_range(3000)) - 1500;
    end
    // reference outputs
    for (int s = 0; s < S; s++) begin
      longint seq [T][];
      for (int t = 0; t < T; t++) seq[t] = xs[t];
      for (int l = 0; l < L; l++) begin
        if (ARCH == ARCH_AUTOENCODER && l == NL)
          for (int t = 0; t < T; t++) seq[t] = seq[T-1];     // repeat h_T
        for (int t = 0; t < T; t++) begin
          longint ho[];
          lm[l].step(seq[t], t == 0, ho);
          seq[t] = ho;
        end
      end
      if (ARCH == ARCH_AUTOENCODER) begin
        for (int t = 0; t < T; t++) begin
          longint y[];
          dense_ref(dw, seq[t], O, y);
          exp_y.push_back(y);
          exp_last.push_back(t == T-1);
        end
      end else begin
        longint z[], p[];
        dense_ref(dw, seq[T-1], O, z);
        softmax_ref(z, p);
        exp_y.push_back(p);
        exp_last.push_back(1'b1);
      end
    end
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int l = 0; l <= L; l++) begin
      int n;
      n = (l < L) ? lm[l].ncfg() : O*H + O;
      for (int a = 0; a < n; a++) begin
        cfg_we = 1'b1; cfg_sel = 4'(l); cfg_addr = 16'(a);
        cfg_data = data_t'((l < L) ? lm[l].cfg_word(a) : dw[a]);
        @(negedge clk);
      end
    end
    cfg_we = 1'b0;
    for (int s = 0; s < S; s++)
      for (int t = 0; t < T; t++) begin
        x_valid = 1'b1; x_first = (t == 0); x_last = (t == T-1);
        foreach (x_vec[n]) x_vec[n] = data_t'(xs[t][n]);
        @(posedge clk);
        while (!x_ready) @(posedge clk);
        @(negedge clk) x_valid = 1'b0;
      end
    while (exp_y.size() != 0) @(posedge clk);
    repeat (5) @(posedge clk);
    finished = 1'b1;
  end
endmodule
