// tb_act_unit: random sums through the four variants (relu/linear, LUT/FF);
// results must match rescale-then-activation of the reference, with zero
// latency for the LUT variant and one cycle for the FF variant.
module tb_act_unit;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  acc_t a;
  val_t r_lut, r_ff, l_lut, l_ff;
  act_unit #(.RELU(1'b1), .FF_IMPL(1'b0)) u0 (.clk(clk), .i_acc(a), .o_val(r_lut));
  act_unit #(.RELU(1'b1), .FF_IMPL(1'b1)) u1 (.clk(clk), .i_acc(a), .o_val(r_ff));
  act_unit #(.RELU(1'b0), .FF_IMPL(1'b0)) u2 (.clk(clk), .i_acc(a), .o_val(l_lut));
  act_unit #(.RELU(1'b0), .FF_IMPL(1'b1)) u3 (.clk(clk), .i_acc(a), .o_val(l_ff));

  task automatic chk(input string w, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s got %0d exp %0d", w, got, exp); end
  endtask

  int h [300];
  initial begin
    for (int t = 0; t < 300; t++) begin
      h[t] = rnd_val(3000000);
      a = acc_t'(h[t]);
      #0.5;
      chk("relu lut", int'(r_lut), ref_relu(ref_rescale(h[t])));
      chk("lin lut", int'(l_lut), ref_rescale(h[t]));
      if (t >= 1) begin
        chk("relu ff", int'(r_ff), ref_relu(ref_rescale(h[t-1])));
        chk("lin ff", int'(l_ff), ref_rescale(h[t-1]));
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
