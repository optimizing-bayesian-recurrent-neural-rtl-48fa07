// Workload testbench: the paper's best ECG classifier on brnn_top, at its
// full size: ARCH = classifier, T = 140 steps, I = 1, H = 8, NL = 3 layers,
// B = Y N Y, RX = 12, RH = 1, RD = 1, four classes. Streams S Monte Carlo
// passes of one sequence and checks each pass's class probabilities bit
// exactly against the reference network, then reports cycles per pass.
module tb_brnn_classifier;
  import brnn_pkg::*;
  localparam int S = 3;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic f;
  int c, e, st, ms, hs, pl, rp, cy, sp;

  top_harness #(.ARCH(ARCH_CLASSIFIER), .T(140), .I(1), .H(8), .NL(3), .B(8'b101),
                .RX(12), .RH(1), .RD(1), .S(S), .BACKPRESSURE(1'b0)) u (
    .clk, .finished(f), .checks(c), .failures(e), .n_stall(st), .n_mask_sets(ms),
    .n_hidden_sampling(hs), .n_pipelined(pl), .n_repeat(rp), .cycles(cy), .span(sp));

  initial begin
    int checks, failures;
    @(posedge clk);
    wait (f);
    checks = c + 2;
    failures = e;
    $display("passes=%0d outputs=%0d cycles=%0d span=%0d mask_sets=%0d pipelined_steps=%0d", S, c, cy, sp, ms, pl);
    if (c != S) begin failures++; $display("wrong number of outputs"); end
    if (ms != 2 * S) begin failures++; $display("wrong number of mask sets"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c, e + 1);
    $finish;
  end
endmodule
