// Self-checking testbench of sipo: random bits with random valid gaps and
// random word lengths must come out packed LSB first, one word per len bits,
// held until out_ready.
module tb_sipo;
  localparam int W = 8, LW = 4;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, in_bit = 1'b0, in_ready;
  logic [LW-1:0] len = 4'd5;
  logic out_valid, out_ready = 1'b0;
  logic [W-1:0] out_word;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  sipo #(.W(W)) dut (.clk, .rst_n, .in_valid, .in_bit, .in_ready, .len,
                     .out_valid, .out_ready, .out_word);

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int w = 0; w < 300; w++) begin
      logic [W-1:0] e;
      int l;
      l = $urandom_range(W, 1);
      len = LW'(l);
      e = '0;
      for (int n = 0; n < l; n++) begin
        while ($urandom_range(2) == 0) @(negedge clk);
        in_valid = 1'b1; in_bit = 1'($urandom); e[n] = in_bit;
        checks++;
        if (!in_ready) begin failures++; $display("not ready mid-word"); end
        @(negedge clk) in_valid = 1'b0;
      end
      in_valid = 1'b1;                       // must be refused while word waits
      repeat ($urandom_range(3)) begin
        checks++;
        if (!out_valid || in_ready) begin failures++; $display("word %0d not offered", w); end
        @(negedge clk);
      end
      in_valid = 1'b0;
      checks++;
      if (!out_valid || out_word !== e) begin
        failures++;
        if (failures < 5) $display("word %0d: got %h exp %h", w, out_word, e);
      end
      out_ready = 1'b1;
      @(negedge clk) out_ready = 1'b0;
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
