// Self-checking testbench of dx: random vectors and masks; each gate copy must
// hold the feature where its mask bit is 1 and zero elsewhere, and every
// feature when bayes_en is low.
module tb_dx;
  import brnn_pkg::*;
  localparam int N = 7;
  data_t vec [N];
  logic [N-1:0] mask [4];
  logic bayes_en;
  data_t gv [4][N];
  int checks = 0, failures = 0;

  dx #(.N(N)) dut (.vec, .mask, .bayes_en, .gate_vec(gv));

  initial begin
    for (int n = 0; n < 500; n++) begin
      foreach (vec[k]) vec[k] = data_t'($urandom);
      foreach (mask[q]) mask[q] = N'($urandom);
      bayes_en = (n % 5 != 0);
      #1;
      for (int q = 0; q < 4; q++)
        for (int k = 0; k < N; k++) begin
          data_t e;
          e = (bayes_en && !mask[q][k]) ? 16'sd0 : vec[k];
          checks++;
          if (gv[q][k] !== e) begin
            failures++;
            if (failures < 5) $display("q=%0d k=%0d got %0d exp %0d", q, k, gv[q][k], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
