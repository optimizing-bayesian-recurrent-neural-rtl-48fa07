// Drives one lstm_layer configuration through several Monte Carlo passes and
// compares every h_t with the reference model (bit exact), including the
// dropout masks regenerated from the LFSR seeds. Pass 0 runs with a free
// output and back-to-back input to check the time-step interval
//   II = max(CX, CH) + 9 cycles (CX, CH: MVM compute cycles for x and h);
// later passes randomise input gaps and output backpressure.
module lstm_layer_harness
  import brnn_pkg::*;
  import brnn_ref_pkg::*;
#(
  parameter int I = 3, parameter int H = 4, parameter int RX = 4, parameter int RH = 3,
  parameter bit BAYES = 1'b1, parameter int T = 5, parameter int PASSES = 3,
  parameter logic [127:0] SEED = 128'h1234_5678_9ABC_DEF0_0FED_CBA9_8765_4321
) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   stalls
);
  localparam int NC  = 4*I*H + 4*H*H + 4*H;
  localparam int CAW = $clog2(NC);
  localparam int MX  = (I*H + RX - 1) / RX, CX = (I*H + MX - 1) / MX;
  localparam int MH  = (H*H + RH - 1) / RH, CH = (H*H + MH - 1) / MH;
  localparam int II  = ((CX > CH) ? CX : CH) + 9;

  logic rst_n = 1'b0;
  logic cfg_we = 1'b0;
  logic [CAW-1:0] cfg_addr = '0;
  data_t cfg_data = '0;
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0, in_ready;
  data_t in_vec [I];
  logic out_valid, out_ready = 1'b1, out_first, out_last, stall, mload;
  data_t out_vec [H];

  lstm_layer #(.I(I), .H(H), .RX(RX), .RH(RH), .BAYES(BAYES), .SEED(SEED)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid, .in_ready, .in_vec, .in_first, .in_last,
    .out_valid, .out_ready, .out_vec, .out_first, .out_last,
    .stall_o(stall), .mask_load_o(mload)
  );

  layer_model m;
  longint xs [PASSES][T][];
  longint exp_h [$][];
  bit     exp_last [$];
  int     cycle = 0, last_accept = -1, pass_now = 0;
  bit     check_ii = 1'b0, prev_first = 1'b0;

  always @(posedge clk) if (rst_n) begin
    cycle <= cycle + 1;
    if (stall) stalls <= stalls + 1;
    if (in_valid && in_ready) begin
      if (check_ii && !(prev_first && BAYES) && last_accept >= 0) begin
        checks <= checks + 1;
        if (cycle - last_accept != II) begin
          failures <= failures + 1;
          $display("II mismatch: got %0d expected %0d", cycle - last_accept, II);
        end
      end
      last_accept <= cycle;
      prev_first  <= in_first;
    end
    if (out_valid && out_ready) begin
      longint e[];
      e = exp_h.pop_front();
      checks <= checks + 1;
      for (int r = 0; r < H; r++)
        if (longint'(out_vec[r]) != e[r] || out_last != exp_last[0]) begin
          failures <= failures + 1;
          $display("h mismatch pass %0d r=%0d got %0d exp %0d", pass_now, r, out_vec[r], e[r]);
          break;
        end
      void'(exp_last.pop_front());
    end
  end

  initial begin
    checks = 0; failures = 0; stalls = 0; finished = 0;
    foreach (in_vec[n]) in_vec[n] = '0;
    m = new(I, H, BAYES, SEED);
    m.randomize_weights(400);
    for (int p = 0; p < PASSES; p++)
      for (int t = 0; t < T; t++) begin
        xs[p][t] = new[I];
        foreach (xs[p][t][n]) xs[p][t][n] = longint'($urandom_range(2048)) - 1024;
      end
    // expected outputs
    for (int p = 0; p < PASSES; p++)
      for (int t = 0; t < T; t++) begin
        longint ho[];
        m.step(xs[p][t], t == 0, ho);
        exp_h.push_back(ho);
        exp_last.push_back(t == T-1);
      end
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int a = 0; a < NC; a++) begin
      @(negedge clk);
      cfg_we = 1'b1; cfg_addr = CAW'(a); cfg_data = data_t'(m.cfg_word(a));
    end
    @(negedge clk) cfg_we = 1'b0;
    repeat (4*I + 4*H + 20) @(posedge clk);   // sampler fills its FIFO
    for (int p = 0; p < PASSES; p++) begin
      pass_now = p;
      check_ii = (p == 0);
      for (int t = 0; t < T; t++) begin
        if (p > 0) repeat ($urandom_range(3)) @(negedge clk);
        @(negedge clk);
        in_valid = 1'b1; in_first = (t == 0); in_last = (t == T-1);
        foreach (in_vec[n]) in_vec[n] = data_t'(xs[p][t][n]);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk) in_valid = 1'b0;
      end
    end
    @(negedge clk) out_ready = 1'b1;
    while (exp_h.size() != 0) @(posedge clk);
    repeat (2) @(posedge clk);
    finished = 1'b1;
    $display("harness I=%0d H=%0d done", I, H);
  end

  // Random output backpressure after the first pass.
  always @(negedge clk) if (pass_now > 0) out_ready <= ((cycle % 60) < 20) && ($urandom_range(3) != 0);
endmodule
