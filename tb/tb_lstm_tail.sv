// Self-checking testbench of lstm_tail: random gate activations and cell
// states; c_t = f*c + i*g and h_t = o*tanh(c_t) checked bit exactly against
// the reference arithmetic, with out_valid three cycles after in_valid.
module tb_lstm_tail;
  import brnn_pkg::*;
  import brnn_ref_pkg::*;
  localparam int H = 5;
  logic clk = 1'b0, rst_n = 1'b0, in_valid = 1'b0, out_valid;
  data_t gi [H], gf [H], gg [H], go [H], h_o [H];
  cell_t c_prev [H], c_o [H];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  lstm_tail #(.H(H)) dut (.clk, .rst_n, .in_valid, .gi, .gf, .gg, .go, .c_prev, .out_valid, .c_o, .h_o);

  initial begin
    for (int h = 0; h < H; h++) begin gi[h] = '0; gf[h] = '0; gg[h] = '0; go[h] = '0; c_prev[h] = '0; end
    repeat (2) @(posedge clk);
    @(negedge clk) rst_n = 1'b1;
    for (int n = 0; n < 400; n++) begin
      longint ec [H], eh [H];
      int lat;
      for (int h = 0; h < H; h++) begin
        gi[h] = data_t'($urandom_range(1024));
        gf[h] = data_t'($urandom_range(1024));
        go[h] = data_t'($urandom_range(1024));
        gg[h] = data_t'(int'($urandom_range(2048)) - 1024);
        c_prev[h] = (n % 7 == 0) ? cell_t'($urandom) : cell_t'(int'($urandom_range(8 << 20)) - (4 << 20));
        ec[h] = sat32(((longint'(gf[h]) * longint'(c_prev[h])) >>> 10) + longint'(gi[h]) * longint'(gg[h]));
        eh[h] = sat16(longint'(go[h]) * tanh_f(ec[h]));
      end
      in_valid = 1'b1;
      @(negedge clk) in_valid = 1'b0;
      for (int h = 0; h < H; h++) c_prev[h] = cell_t'($urandom);
      lat = 1;
      while (!out_valid) begin @(negedge clk); lat++; end
      checks++;
      if (lat != 3) begin failures++; $display("latency %0d", lat); end
      for (int h = 0; h < H; h++) begin
        checks += 2;
        if (longint'(c_o[h]) != ec[h]) begin failures++; if (failures < 5) $display("c got %0d exp %0d", c_o[h], ec[h]); end
        if (longint'(h_o[h]) != eh[h]) begin failures++; if (failures < 5) $display("h got %0d exp %0d", h_o[h], eh[h]); end
      end
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
