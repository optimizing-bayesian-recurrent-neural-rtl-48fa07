// Self-checking testbench of lfsr: the output sequence must match an
// independent model of the 128-bit shift register with taps 102/121/126/127,
// hold while en is low, and be balanced (about half ones).
module tb_lfsr;
  localparam logic [127:0] SEED = 128'h8000_0000_0000_0001_F0F0_A5A5_0000_1111;
  logic clk = 1'b0, rst_n = 1'b0, en = 1'b0, b;
  int checks = 0, failures = 0, ones = 0;
  bit [127:0] r;
  always #5 clk = ~clk;

  lfsr #(.WIDTH(128), .SEED(SEED)) dut (.clk, .rst_n, .en, .bit_o(b));

  initial begin
    r = SEED;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 4000; n++) begin
      en = ($urandom_range(3) != 0);
      checks++;
      if (b !== r[127]) begin
        failures++;
        if (failures < 5) $display("step %0d: got %0b exp %0b", n, b, r[127]);
      end
      if (en) begin
        ones += r[127];
        r = {r[126:0], r[102] ^ r[121] ^ r[126] ^ r[127]};
      end
      @(negedge clk);
    end
    checks++;
    if (ones < 1200 || ones > 1800) begin failures++; $display("ones=%0d", ones); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
