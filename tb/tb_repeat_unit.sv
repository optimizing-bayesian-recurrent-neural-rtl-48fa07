// Self-checking testbench of repeat_unit: feeds sequences in which only the
// last vector is the encoding, back to back so that the next encoding arrives
// while the previous one is being replayed; every encoding must come out
// exactly T times, in order, with first/last marks, under random backpressure.
module tb_repeat_unit;
  import brnn_pkg::*;
  localparam int N = 3, T = 7;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_valid = 1'b0, in_ready, in_last = 1'b0;
  data_t in_vec [N];
  logic out_valid, out_ready = 1'b0, out_first, out_last;
  data_t out_vec [N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  repeat_unit #(.N(N), .T(T)) dut (.clk, .rst_n, .in_valid, .in_ready, .in_vec, .in_last,
    .out_valid, .out_ready, .out_vec, .out_first, .out_last);

  always @(negedge clk) out_ready <= ($urandom_range(2) != 0);

  data_t encs [$][N];
  bit     sent_all = 1'b0;

  // Producer: sequences back to back, so encodings arrive during replays.
  initial begin
    foreach (in_vec[n]) in_vec[n] = '0;
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int s = 0; s < 20; s++) begin
      for (int t = 0; t < 5; t++) begin
        in_valid = 1'b1; in_last = (t == 4);
        foreach (in_vec[n]) in_vec[n] = data_t'($urandom);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        if (in_last) encs.push_back(in_vec);
        @(negedge clk);
        in_valid = 1'b0;
        if (s >= 10) repeat ($urandom_range(8)) @(negedge clk);
      end
    end
    sent_all = 1'b1;
  end

  // Consumer: every encoding exactly T times, in order, with first/last.
  initial begin
    int got, seqs;
    got = 0; seqs = 0;
    while (seqs < 20) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        checks++;
        if (encs.size() == 0 || out_vec != encs[0] || out_first != (got == 0) || out_last != (got == T-1)) begin
          failures++; $display("seq %0d copy %0d wrong", seqs, got);
        end
        got++;
        if (got == T) begin got = 0; seqs++; void'(encs.pop_front()); end
      end
    end
    repeat (20) @(posedge clk);
    checks++;
    if (out_valid || !sent_all) begin failures++; $display("extra output or producer stuck"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
