// tb_neuron_unit: 7 inputs on P = 3 pipelines (stages of 3, 2 and 2 DSPs, so
// two pipelines use the alignment register). Weights of stage s for neuron m
// are presented in cycle s+1+m, as the layer's controller does; the sum of
// neuron m must appear in cycle S+m+3+ceil(log2 P) = m+8 with the exact
// integer dot product.
module tb_neuron_unit;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int N_I = 7, P = 3, S = 3, M = 12;
  val_t in [N_I];
  wgt_t w [S][P];
  acc_t sum;
  neuron_unit #(.N_I(N_I), .P(P)) dut (.clk(clk), .i_in(in), .i_w(w), .o_sum(sum));

  int iv [N_I];
  int wv [M][N_I];
  int expv [M];
  initial begin
    for (int i = 0; i < N_I; i++) begin iv[i] = rnd_val(8191); in[i] = val_t'(iv[i]); end
    for (int m = 0; m < M; m++) begin
      expv[m] = 0;
      for (int i = 0; i < N_I; i++) begin wv[m][i] = rnd_wgt(511); expv[m] += iv[i] * wv[m][i]; end
    end
    // cycle c = 0 .. M+S+8
    for (int c = 0; c < M + S + 10; c++) begin
      for (int s = 0; s < S; s++) for (int p = 0; p < P; p++) begin
        int m, i;
        m = c - s - 1; i = s * P + p;
        w[s][p] = (m >= 0 && m < M && i < N_I) ? wgt_t'(wv[m][i]) : wgt_t'(0);
      end
      #0.5;
      if (c - 8 >= 0 && c - 8 < M) begin
        checks++;
        if (int'(sum) != expv[c-8]) begin failures++; $display("FAIL m=%0d got %0d exp %0d", c-8, sum, expv[c-8]); end
      end
      @(posedge clk); #0.1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
