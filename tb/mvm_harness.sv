// Loads random weights into one mvm configuration and runs random vectors,
// comparing y with a direct sum of products and the start-to-done latency
// with ceil(N*H/M) + 1 cycles, M = ceil(N*H/R).
module mvm_harness
  import brnn_pkg::*;
#(parameter int N = 5, parameter int H = 3, parameter int R = 4, parameter int RUNS = 50) (
  input  logic clk,
  output logic finished,
  output int   checks,
  output int   failures
);
  localparam int P = N*H, M = (P + R - 1) / R, C = (P + M - 1) / M;
  localparam int AW = (P > 1) ? $clog2(P) : 1;
  logic rst_n = 1'b0, w_we = 1'b0, start = 1'b0, busy, done;
  logic [AW-1:0] w_addr = '0;
  data_t w_data = '0;
  data_t vec [N];
  acc_t  y [H];
  longint wm [P];

  mvm #(.N(N), .H(H), .R(R)) dut (.clk, .rst_n, .w_we, .w_addr, .w_data, .start, .vec, .busy, .done, .y);

  initial begin
    checks = 0; failures = 0; finished = 0;
    foreach (vec[n]) vec[n] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int k = 0; k < P; k++) begin
      wm[k] = longint'($urandom_range(65535)) - 32768;
      w_we = 1'b1; w_addr = AW'(k); w_data = data_t'(wm[k]);
      @(negedge clk);
    end
    w_we = 1'b0;
    for (int run = 0; run < RUNS; run++) begin
      longint v [N];
      int lat;
      foreach (v[n]) begin v[n] = longint'($urandom_range(65535)) - 32768; vec[n] = data_t'(v[n]); end
      start = 1'b1;
      @(negedge clk) start = 1'b0;
      foreach (vec[n]) vec[n] = data_t'($urandom);   // must have been latched
      lat = 1;
      while (!done) begin @(negedge clk); lat++; end
      checks++;
      if (lat != C + 1) begin failures++; $display("latency %0d exp %0d", lat, C + 1); end
      for (int h = 0; h < H; h++) begin
        longint s;
        s = 0;
        for (int n = 0; n < N; n++) s += wm[h*N + n] * v[n];
        checks++;
        if (longint'(y[h]) != s) begin
          failures++;
          if (failures < 5) $display("N=%0d row %0d got %0d exp %0d", N, h, y[h], s);
        end
      end
      repeat ($urandom_range(2)) @(negedge clk);
    end
    finished = 1'b1;
  end
endmodule
