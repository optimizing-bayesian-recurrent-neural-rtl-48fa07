// Self-checking testbench of bernoulli_sampler: the mask words must match a
// model of the three LFSRs and the NAND, in the order of one mask set (four
// I-bit words, four H-bit words), the FIFO must fill to one set and stop, and
// the fraction of zero bits over many sets must be near p = 0.125.
module tb_bernoulli_sampler;
  import brnn_ref_pkg::*;
  localparam int I = 3, H = 6, W = 6;
  localparam logic [127:0] SEED = 128'hDEAD_BEEF_0BAD_F00D_1357_9BDF_2468_ACE0;

  logic clk = 1'b0, rst_n = 1'b0, pop = 1'b0, valid;
  logic [W-1:0] word;
  int checks = 0, failures = 0, zeros = 0, bits = 0;

  always #5 clk = ~clk;

  bernoulli_sampler #(.I(I), .H(H), .FIFO_DEPTH(8), .SEED(SEED)) dut (
    .clk, .rst_n, .pop, .word_o(word), .valid_o(valid)
  );

  sampler_model m;

  initial begin
    bit mx[4][], mh[4][];
    m = new(I, H, SEED);
    repeat (2) @(posedge clk);
    rst_n = 1'b1;
    // The FIFO fills with one set and then holds.
    repeat (4*I + 4*H + 40) @(posedge clk);
    checks++;
    if (!dut.u_fifo.full) begin failures++; $display("FIFO not full after one set"); end
    for (int s = 0; s < 200; s++) begin
      m.next_set(mx, mh);
      for (int w = 0; w < 8; w++) begin
        logic [W-1:0] e;
        int len;
        len = (w < 4) ? I : H;
        e = '0;
        for (int n = 0; n < len; n++) e[n] = (w < 4) ? mx[w][n] : mh[w-4][n];
        @(negedge clk);
        while (!valid) @(negedge clk);
        checks++;
        if (word !== e) begin
          failures++;
          if (failures < 5) $display("set %0d word %0d: got %h exp %h", s, w, word, e);
        end
        for (int n = 0; n < len; n++) begin bits++; zeros += !e[n]; end
        pop = 1'b1;
        @(negedge clk) pop = 1'b0;
      end
    end
    checks++;
    if (zeros * 1000 < bits * 95 || zeros * 1000 > bits * 155) begin
      failures++;
      $display("zero fraction %0d/%0d far from 1/8", zeros, bits);
    end
    $display("zero fraction %0d/%0d", zeros, bits);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
