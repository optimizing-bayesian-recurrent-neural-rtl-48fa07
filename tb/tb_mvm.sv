// Self-checking testbench of mvm: three reuse-factor configurations, including
// the paper's first-layer input MVM (N = 1, H = 16, R = 16: one multiplier,
// 16 cycles) and a fully parallel one (R = 1).
module tb_mvm;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic f0, f1, f2;
  int c0, c1, c2, e0, e1, e2;
  mvm_harness #(.N(5), .H(3), .R(4))   u0 (.clk, .finished(f0), .checks(c0), .failures(e0));
  mvm_harness #(.N(1), .H(16), .R(16)) u1 (.clk, .finished(f1), .checks(c1), .failures(e1));
  mvm_harness #(.N(6), .H(4), .R(1))   u2 (.clk, .finished(f2), .checks(c2), .failures(e2));
  initial begin
    @(posedge clk);
    wait (f0 && f1 && f2);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", c0 + c1 + c2, e0 + e1 + e2 + 1);
    $finish;
  end
endmodule
