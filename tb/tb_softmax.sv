// Self-checking testbench of softmax: random logits (including widely spread
// ones that drive entries to zero) against the reference table model, the
// probabilities summing to about 1, and the latency of O + 3 cycles.
module tb_softmax;
  import brnn_pkg::*;
  import brnn_ref_pkg::*;
  localparam int O = 4;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, in_ready, in_last = 1'b0, out_valid, out_last;
  data_t in_vec [O], out_vec [O];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  softmax #(.O(O)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_vec, .in_last,
    .out_valid, .out_ready(1'b1), .out_vec, .out_last);

  initial begin
    foreach (in_vec[n]) in_vec[n] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int s = 0; s < 300; s++) begin
      longint z[], p[];
      longint sum;
      int lat;
      z = new[O];
      foreach (z[k]) begin
        z[k] = (s % 5 == 0) ? longint'($urandom_range(65535)) - 32768 : longint'($urandom_range(6000)) - 3000;
        in_vec[k] = data_t'(z[k]);
      end
      softmax_ref(z, p);
      in_valid = 1'b1; in_last = s[0];
      @(negedge clk) in_valid = 1'b0;
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat != O + 3) begin failures++; $display("latency %0d", lat); end
      sum = 0;
      for (int k = 0; k < O; k++) begin
        checks++;
        sum += longint'(out_vec[k]);
        if (longint'(out_vec[k]) != p[k]) begin failures++; if (failures < 6) $display("k=%0d got %0d exp %0d", k, out_vec[k], p[k]); end
      end
      checks++;
      if (sum < 1020 || sum > 1024 || out_last != s[0]) begin failures++; $display("sum %0d", sum); end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
