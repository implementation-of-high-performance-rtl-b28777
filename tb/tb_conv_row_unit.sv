// tb_conv_row_unit: one row unit (input width 6, 3 channels, 2x3 kernel)
// computes a sequence of output rows, each with its own kernel; input
// channel d and the stage-d weights of element k are presented in cycle
// k+d+1 as the layer schedules them. The W_O = 4 sums of element k must
// appear in cycle k + D_I + 3 + ceil(log2 6) = k+9 and equal the exact
// integer convolution.
module tb_conv_row_unit;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int WI = 6, DI = 3, HK = 2, WK = 3, WO = 4, NE = 8;
  val_t sl [HK][DI][WI];
  wgt_t w [DI][HK*WK];
  acc_t sum [WO];
  conv_row_unit #(.W_I(WI), .D_I(DI), .H_K(HK), .W_K(WK)) dut (.clk(clk), .i_slices(sl), .i_w(w), .o_sum(sum));

  int iv [NE][HK][DI][WI];
  int wv [NE][DI][HK*WK];
  function automatic int ref_sum(int e, int x);
    int s; s = 0;
    for (int kh = 0; kh < HK; kh++) for (int kw = 0; kw < WK; kw++) for (int d = 0; d < DI; d++)
      s += iv[e][kh][d][x+kw] * wv[e][d][kh*WK+kw];
    return s;
  endfunction

  initial begin
    for (int e = 0; e < NE; e++) begin
      for (int kh = 0; kh < HK; kh++) for (int d = 0; d < DI; d++) for (int x = 0; x < WI; x++)
        iv[e][kh][d][x] = rnd_val(8191);
      for (int d = 0; d < DI; d++) for (int p = 0; p < HK*WK; p++) wv[e][d][p] = rnd_wgt(511);
    end
    for (int c = 0; c < NE + 12; c++) begin
      for (int d = 0; d < DI; d++) begin
        int e; e = c - d - 1;
        for (int kh = 0; kh < HK; kh++) for (int x = 0; x < WI; x++)
          sl[kh][d][x] = (e >= 0 && e < NE) ? val_t'(iv[e][kh][d][x]) : val_t'(0);
        for (int p = 0; p < HK*WK; p++) w[d][p] = (e >= 0 && e < NE) ? wgt_t'(wv[e][d][p]) : wgt_t'(0);
      end
      #0.5;
      if (c >= 9 && c - 9 < NE)
        for (int x = 0; x < WO; x++) begin
          checks++;
          if (int'(sum[x]) != ref_sum(c - 9, x)) begin failures++; $display("FAIL e=%0d x=%0d", c - 9, x); end
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
