// Self-checking testbench of mask_fifo: random push/pop traffic against a
// queue model, checking order, full/empty flags and that pushes when full and
// pops when empty are ignored.
module tb_mask_fifo;
  localparam int W = 12, DEPTH = 5;
  logic clk = 1'b0, rst_n = 1'b0, push = 1'b0, pop = 1'b0, full, empty;
  logic [W-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic [W-1:0] q [$];
  always #5 clk = ~clk;

  mask_fifo #(.W(W), .DEPTH(DEPTH)) dut (.clk, .rst_n, .push, .din, .pop, .dout, .full, .empty);

  initial begin
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 3000; n++) begin
      push = ($urandom_range(n % 200 < 100 ? 3 : 1) != 0);
      pop  = ($urandom_range(n % 200 < 100 ? 1 : 3) != 0);
      din  = W'($urandom);
      checks++;
      if (full != (q.size() == DEPTH) || empty != (q.size() == 0) ||
          (q.size() != 0 && dout !== q[0])) begin
        failures++;
        if (failures < 5) $display("n=%0d size=%0d full=%0b empty=%0b dout=%h", n, q.size(), full, empty, dout);
      end
      @(posedge clk);
      begin
        bit can_push, can_pop;
        can_push = push && q.size() < DEPTH;
        can_pop  = pop && q.size() > 0;
        if (can_pop) void'(q.pop_front());
        if (can_push) q.push_back(din);
      end
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
