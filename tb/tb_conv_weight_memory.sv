// tb_conv_weight_memory: loads 3 kernels of 2x2x2 weights, then reads every
// stage with independent random output-channel addresses; the weights must
// appear one cycle after the address.
module tb_conv_weight_memory;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DI = 2, DO = 3, HK = 2, WK = 2;
  logic we;
  logic [1:0] wk, pos;
  logic wd;
  wgt_t wdata;
  logic [1:0] raddr [DI];
  wgt_t w [DI][HK*WK];
  conv_weight_memory #(.D_I(DI), .D_O(DO), .H_K(HK), .W_K(WK)) dut (.clk(clk), .i_we(we), .i_wk(wk),
    .i_wd(wd), .i_wpos(pos), .i_wdata(wdata), .i_raddr(raddr), .o_w(w));

  int wv [DO][DI][HK*WK];
  initial begin
    we = 0;
    for (int c = 0; c < DO; c++) for (int d = 0; d < DI; d++) for (int p = 0; p < HK*WK; p++) begin
      wv[c][d][p] = rnd_wgt(511);
      we = 1; wk = 2'(c); wd = d[0]; pos = 2'(p); wdata = wgt_t'(wv[c][d][p]);
      @(posedge clk); #0.1;
    end
    we = 0;
    for (int t = 0; t < 50; t++) begin
      int a [DI];
      for (int d = 0; d < DI; d++) begin a[d] = $urandom_range(DO - 1); raddr[d] = 2'(a[d]); end
      @(posedge clk); #0.1;
      for (int d = 0; d < DI; d++) for (int p = 0; p < HK*WK; p++) begin
        checks++;
        if (int'(w[d][p]) != wv[a[d]][d][p]) begin failures++; $display("FAIL t=%0d d=%0d p=%0d", t, d, p); end
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
