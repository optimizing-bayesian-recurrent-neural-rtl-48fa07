// Self-checking testbench of act_lut: sigmoid and tanh tables against exp()
// evaluated at the table point of each input (index = clamp(x/2^14 + 512)),
// including saturation far outside [-8, 8), with the one-cycle read latency,
// and a bound on the error against the exact functions inside the range.
module tb_act_lut;
  import brnn_pkg::*;
  import brnn_ref_pkg::*;
  logic clk = 1'b0;
  acc_t x = '0;
  data_t ys, yt;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  act_lut #(.FUNC(ACT_SIGMOID)) u_s (.clk, .x, .y(ys));
  act_lut #(.FUNC(ACT_TANH))    u_t (.clk, .x, .y(yt));

  initial begin
    for (int n = 0; n < 3000; n++) begin
      longint v;
      real xr;
      if (n % 10 == 0) v = longint'($urandom) * 64;   // far out of range
      else v = longint'($urandom_range(20 << 20)) - longint'(10 << 20);
      if ($urandom_range(1)) v = -v;
      @(negedge clk) x = acc_t'(v);
      @(negedge clk);
      checks += 2;
      if (longint'(ys) != sigm(v)) begin failures++; if (failures < 5) $display("sig x=%0d got %0d exp %0d", v, ys, sigm(v)); end
      if (longint'(yt) != tanh_f(v)) begin failures++; if (failures < 5) $display("tanh x=%0d got %0d exp %0d", v, yt, tanh_f(v)); end
      xr = real'(v) / 1048576.0;
      if (xr > -7.9 && xr < 7.9) begin
        real es, et;
        es = real'(ys) / 1024.0 - 1.0 / (1.0 + $exp(-xr));
        et = real'(yt) / 1024.0 - ($exp(2.0*xr) - 1.0) / ($exp(2.0*xr) + 1.0);
        checks++;
        if (es > 0.02 || es < -0.02 || et > 0.04 || et < -0.04) begin
          failures++; $display("x=%f error sig %f tanh %f", xr, es, et);
        end
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
