// Self-checking testbench of dense: a temporal instance (every step) and a
// last-only instance (classifier) with random weights, checked bit exactly
// against y = W h + b saturated to 16 bits, with the per-vector latency
// ceil(O*N/M) + 3 cycles (M = ceil(O*N/RD)).
module tb_dense;
  import brnn_pkg::*;
  import brnn_ref_pkg::*;
  localparam int N = 6, O = 3, RD = 5;
  localparam int M = (O*N + RD - 1) / RD, C = (O*N + M - 1) / M;
  localparam int NC = O*N + O, CAW = $clog2(NC);
  logic clk = 1'b0, rst_n = 1'b0, cfg_we = 1'b0;
  logic [CAW-1:0] cfg_addr = '0;
  data_t cfg_data = '0;
  logic in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0, rdy_a, rdy_b;
  data_t in_vec [N];
  logic va, vb, fa, fb, la, lb;
  data_t ya [O], yb [O];
  int checks = 0, failures = 0;
  longint w [NC];
  always #5 clk = ~clk;

  dense #(.N(N), .O(O), .RD(RD), .LAST_ONLY(1'b0)) u_a (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid, .in_ready(rdy_a), .in_vec, .in_first, .in_last,
    .out_valid(va), .out_ready(1'b1), .out_vec(ya), .out_first(fa), .out_last(la));
  dense #(.N(N), .O(O), .RD(RD), .LAST_ONLY(1'b1)) u_b (.clk, .rst_n, .cfg_we, .cfg_addr, .cfg_data,
    .in_valid, .in_ready(rdy_b), .in_vec, .in_first, .in_last,
    .out_valid(vb), .out_ready(1'b1), .out_vec(yb), .out_first(fb), .out_last(lb));

  int outs_b = 0;
  always @(posedge clk) if (rst_n && vb) outs_b <= outs_b + 1;

  initial begin
    foreach (in_vec[n]) in_vec[n] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int a = 0; a < NC; a++) begin
      w[a] = longint'($urandom_range(4000)) - 2000;
      cfg_we = 1'b1; cfg_addr = CAW'(a); cfg_data = data_t'(w[a]);
      @(negedge clk);
    end
    cfg_we = 1'b0;
    for (int s = 0; s < 60; s++) begin
      longint v[], e[];
      int lat;
      v = new[N];
      foreach (v[n]) begin
        v[n] = (s % 10 == 9) ? longint'($urandom_range(65535)) - 32768 : longint'($urandom_range(4000)) - 2000;
        in_vec[n] = data_t'(v[n]);
      end
      dense_ref(w, v, O, e);
      in_valid = 1'b1; in_first = (s % 4 == 0); in_last = (s % 4 == 3);
      @(negedge clk) in_valid = 1'b0;
      lat = 1;
      while (!va) begin @(negedge clk); lat++; end
      checks++;
      if (lat != C + 3) begin failures++; $display("latency %0d exp %0d", lat, C + 3); end
      for (int o = 0; o < O; o++) begin
        checks++;
        if (longint'(ya[o]) != e[o]) begin failures++; if (failures < 6) $display("o=%0d got %0d exp %0d", o, ya[o], e[o]); end
        if (s % 4 == 3) begin
          checks++;
          if (!vb || yb[o] != ya[o]) begin failures++; $display("last-only output missing"); end
        end
      end
      checks++;
      if (la != (s % 4 == 3) || fa != (s % 4 == 0)) begin failures++; $display("flags wrong"); end
      @(negedge clk);
    end
    checks++;
    if (outs_b != 15) begin failures++; $display("last-only produced %0d outputs", outs_b); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
