// tb_adder_tree: random operands into trees of 5 and 4 leaves with
// different register options; each sum is compared with the reference sum
// after the configured latency (IN_REG + LVL_REG*ceil(log2 N) + OUT_REG).
module tb_adder_tree;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  acc_t a5 [5], a4 [4];
  acc_t s5, s4;
  adder_tree #(.N(5), .IN_REG(1'b0), .LVL_REG(1'b1), .OUT_REG(1'b0)) dut5 (.clk(clk), .i_d(a5), .o_sum(s5));
  adder_tree #(.N(4), .IN_REG(1'b1), .LVL_REG(1'b0), .OUT_REG(1'b1)) dut4 (.clk(clk), .i_d(a4), .o_sum(s4));

  int h5 [200], h4 [200];
  initial begin
    for (int t = 0; t < 200; t++) begin
      h5[t] = 0; h4[t] = 0;
      for (int e = 0; e < 5; e++) begin
        int v; v = rnd_val(1000000);
        a5[e] = acc_t'(v); h5[t] += v;
      end
      for (int e = 0; e < 4; e++) begin
        int v; v = rnd_val(1000000);
        a4[e] = acc_t'(v); h4[t] += v;
      end
      #0.5;
      // latency 3 for N=5 (3 levels), 2 for N=4 (in + out register)
      if (t >= 3) begin
        checks++;
        if (int'(s5) != h5[t-3]) begin failures++; $display("FAIL N5 t=%0d", t); end
      end
      if (t >= 2) begin
        checks++;
        if (int'(s4) != h4[t-2]) begin failures++; $display("FAIL N4 t=%0d", t); end
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
