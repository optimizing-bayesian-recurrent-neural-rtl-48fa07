// Full-size testbench: brnn_top with every parameter at its default, the
// anomaly-detection autoencoder of T = 140 steps, I = 1, H = 16, NL = 2
// (encoder 1->16->8, decoder 8->16->16, temporal dense 16->1), B = Y N Y N,
// RX = 16, RH = 5, RD = 16. It streams S Monte Carlo passes of one ECG-length
// sequence (one full inference at the paper's S = 30) and checks every
// reconstructed sample bit exactly against the reference network and the
// inference time against the per-layer initiation interval.
module tb_brnn_full;
  import brnn_pkg::*;
  localparam int S = 30;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic f;
  int c, e, st, ms, hs, pl, rp, cy, sp;

  top_harness #(.ARCH(ARCH_AUTOENCODER), .T(140), .I(1), .H(16), .NL(2), .B(8'b0101),
                .RX(16), .RH(5), .RD(16), .S(S), .BACKPRESSURE(1'b0), .USE_DEFAULTS(1'b1)) u (
    .clk, .finished(f), .checks(c), .failures(e), .n_stall(st), .n_mask_sets(ms),
    .n_hidden_sampling(hs), .n_pipelined(pl), .n_repeat(rp), .cycles(cy), .span(sp));

  initial begin
    int checks, failures;
    @(posedge clk);
    wait (f);
    checks = c + 4;
    failures = e;
    $display("passes=%0d outputs=%0d cycles=%0d mask_sets=%0d pipelined_steps=%0d repeated=%0d",
             S, c, cy, ms, pl, rp);
    // Every layer has II = 16 + 9 = 25 cycles per step at these sizes, so a pass
    // occupies the encoder (and then the decoder) for 140 * 25 = 3500 cycles;
    // with the encoder of pass s+1 overlapping the decoder of pass s, S passes
    // take (S + 1) * 3500 cycles plus the fill latency of the pipeline.
    $display("inference of %0d passes: %0d cycles from first input to last output", S, sp);
    if (sp < (S + 1) * 3500 || sp > (S + 1) * 3500 + 400) begin
      failures++; $display("inference time outside the expected window");
    end
    if (c != S * 140) begin failures++; $display("wrong number of outputs"); end
    if (ms != 2 * S)  begin failures++; $display("wrong number of mask sets"); end
    if (rp != S * 140) begin failures++; $display("repeat fed %0d steps", rp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c, e + 1);
    $finish;
  end
endmodule
