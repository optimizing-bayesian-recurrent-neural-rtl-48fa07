// End-to-end testbench of brnn_top at reduced sizes: a Bayesian recurrent
// autoencoder (NL = 2, B = Y N Y N) and a Bayesian classifier (NL = 3,
// B = Y N Y), each run for several Monte Carlo passes with random output
// backpressure and checked bit exactly against the reference network. Every
// mechanism of the design must have happened at least once: backpressure
// stall, mask-set read, mask set ready ahead of use, time-step pipelining
// between layers, and the repeat unit feeding the decoder.
module tb_brnn_top;
  import brnn_pkg::*;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic fa, fc;
  int ca, ea, sa, ma, ha, pa, ra, ya;
  int cc, ec, sc, mc, hc, pc, rc, yc;

  top_harness #(.ARCH(ARCH_AUTOENCODER), .T(6), .I(2), .H(4), .NL(2), .B(8'b0101),
                .RX(3), .RH(2), .RD(2), .S(3)) u_ae (
    .clk, .finished(fa), .checks(ca), .failures(ea), .n_stall(sa), .n_mask_sets(ma),
    .n_hidden_sampling(ha), .n_pipelined(pa), .n_repeat(ra), .cycles(ya), .span());
  top_harness #(.ARCH(ARCH_CLASSIFIER), .T(7), .I(1), .H(4), .NL(3), .B(8'b101),
                .RX(2), .RH(1), .RD(1), .S(4)) u_cls (
    .clk, .finished(fc), .checks(cc), .failures(ec), .n_stall(sc), .n_mask_sets(mc),
    .n_hidden_sampling(hc), .n_pipelined(pc), .n_repeat(rc), .cycles(yc), .span());

  initial begin
    int checks, failures;
    @(posedge clk);
    wait (fa && fc);
    checks = ca + cc;
    failures = ea + ec;
    $display("autoencoder: stalls=%0d mask_sets=%0d sampled_ahead=%0d pipelined_steps=%0d repeated=%0d",
             sa, ma, ha, pa, ra);
    $display("classifier:  stalls=%0d mask_sets=%0d sampled_ahead=%0d pipelined_steps=%0d", sc, mc, hc, pc);
    checks += 6;
    if (sa + sc == 0) begin failures++; $display("no stall happened"); end
    if (ma != 2*3 || mc != 2*4) begin failures++; $display("wrong number of mask sets"); end
    if (ha == 0 || hc == 0) begin failures++; $display("sampling never hidden"); end
    if (pa == 0 || pc == 0) begin failures++; $display("no time-step pipelining"); end
    if (ra != 3*6 || rc != 0) begin failures++; $display("repeat fed %0d decoder steps", ra); end
    if (cc != 4 || ca != 3*6) begin failures++; $display("wrong number of outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ca + cc, ea + ec + 1);
    $finish;
  end
endmodule
