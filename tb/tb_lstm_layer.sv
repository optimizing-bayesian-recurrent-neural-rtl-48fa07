// Self-checking testbench of lstm_layer: a Bayesian and a non-Bayesian
// configuration, each over several Monte Carlo passes, checked bit exactly
// against the reference model, with the time-step interval and backpressure.
module tb_lstm_layer;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic f0, f1;
  int c0, c1, e0, e1, s0, s1;

  lstm_layer_harness #(.I(3), .H(4), .RX(4), .RH(3), .BAYES(1'b1), .T(6), .PASSES(3))
    u_bayes (.clk, .finished(f0), .checks(c0), .failures(e0), .stalls(s0));
  lstm_layer_harness #(.I(2), .H(5), .RX(1), .RH(7), .BAYES(1'b0), .T(5), .PASSES(2))
    u_plain (.clk, .finished(f1), .checks(c1), .failures(e1), .stalls(s1));

  initial begin
    int checks, failures;
    @(posedge clk);
    wait (f0 && f1);
    checks = c0 + c1 + 1;
    failures = e0 + e1;
    if (s0 + s1 == 0) begin
      failures++;
      $display("no backpressure stall happened");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1, e0 + e1 + 1);
    $finish;
  end
endmodule
