// tb_dsp_mac: random values, weights and cascade inputs; the output in cycle
// t+3 must equal value(t)*weight(t) + cascade(t+2) (three register levels,
// cascade added before the accumulation register).
module tb_dsp_mac;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  val_t v; wgt_t w; acc_t pc, p;
  dsp_mac dut (.clk(clk), .i_val(v), .i_wgt(w), .i_pcin(pc), .o_p(p));

  int hv [300], hw [300], hp [300];
  initial begin
    for (int t = 0; t < 300; t++) begin
      hv[t] = rnd_val(8191); hw[t] = rnd_wgt(511); hp[t] = rnd_val(100000);
    end
    for (int t = 0; t < 300; t++) begin
      v = val_t'(hv[t]); w = wgt_t'(hw[t]); pc = acc_t'(hp[t]);
      @(posedge clk); #0.5;
      // now in cycle t+1: o_p holds the result of the presentation at t-2
      if (t >= 2) begin
        checks++;
        if (int'(p) != hv[t-2] * hw[t-2] + hp[t]) begin
          failures++;
          $display("FAIL t=%0d got %0d exp %0d", t, p, hv[t-2] * hw[t-2] + hp[t]);
        end
      end
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
