// tb_max_tree: random 6.8 values into trees of 4 and 9 leaves; every result
// must equal the reference maximum, 2 and 4 cycles later.
module tb_max_tree;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  val_t a4 [4], a9 [9];
  val_t m4, m9;
  max_tree #(.N(4)) dut4 (.clk(clk), .i_d(a4), .o_max(m4));
  max_tree #(.N(9)) dut9 (.clk(clk), .i_d(a9), .o_max(m9));

  int h4 [200], h9 [200];
  initial begin
    for (int t = 0; t < 200; t++) begin
      h4[t] = -100000; h9[t] = -100000;
      for (int e = 0; e < 4; e++) begin
        int v; v = rnd_val(8191);
        if (t % 7 == 0) v = -8192 + e;   // near the padding value
        a4[e] = val_t'(v); if (v > h4[t]) h4[t] = v;
      end
      for (int e = 0; e < 9; e++) begin
        int v; v = rnd_val(8191);
        a9[e] = val_t'(v); if (v > h9[t]) h9[t] = v;
      end
      #0.5;
      if (t >= 2) begin
        checks++;
        if (int'(m4) != h4[t-2]) begin failures++; $display("FAIL N4 t=%0d %0d %0d", t, m4, h4[t-2]); end
      end
      if (t >= 4) begin
        checks++;
        if (int'(m9) != h9[t-4]) begin failures++; $display("FAIL N9 t=%0d", t); end
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
