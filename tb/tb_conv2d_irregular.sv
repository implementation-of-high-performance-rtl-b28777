// tb_conv2d_irregular: the irregular allocation case of the convolution.
//  1. The allocation table for C = 15, D_O = 11, H_O = 19 (14 row units) is
//     compared, row by row, with the worked example of the irregular scheme:
//     for the five leftover slices 14..18 the row units computing channels
//     0..10 are listed below (single-slice units 0-4 on even channels 0-6,
//     complete bi-slice units 5, 7-10 on odd channels 1-7, incomplete
//     bi-slice unit 6, multi-slice units 11-13 on channels 8-10).
//  2. That layer (20x3x2 input, eleven 2x2x2 kernels) and the convolution of
//     a 14x14 network with two 2x2 kernels at C = 13 (13 slices, 2 row
//     units, 6 complete slices each) are run through conv_irr_checker:
//     values and exact output cycles for three images each.
module tb_conv2d_irregular;
  import nn_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int EXP [5][11] = '{
    '{0, 5, 0, 5, 0, 5, 0, 5,  6,  6,  6},
    '{1, 7, 1, 7, 1, 7, 1, 7, 11, 11, 11},
    '{2, 8, 2, 8, 2, 8, 2, 8, 11, 12, 12},
    '{3, 9, 3, 9, 3, 9, 3, 9, 12, 12, 13},
    '{4, 10, 4, 10, 4, 10, 4, 10, 13, 13, 13}};

  logic go = 1'b0;
  logic done_a, done_b;
  int ca, fa, ra, cb, fb, rb;
  conv_irr_checker #(.HI(20), .WI(3), .DI(2), .HK(2), .WK(2), .NK(11), .C(15)) u_a (
    .clk(clk), .i_go(go), .o_done(done_a), .o_checks(ca), .o_failures(fa), .o_rem(ra));
  conv_irr_checker #(.HI(14), .WI(14), .DI(1), .HK(2), .WK(2), .NK(2), .C(13)) u_b (
    .clk(clk), .i_go(go), .o_done(done_b), .o_checks(cb), .o_failures(fb), .o_rem(rb));

  initial begin
    for (int s = 0; s < 5; s++) for (int ch = 0; ch < 11; ch++) begin
      int r;
      r = conv_alloc_ru(19, 11, 15, (14 + s) * 11 + ch);
      checks++;
      if (r != EXP[s][ch]) begin failures++; $display("FAIL allocation slice %0d ch %0d: unit %0d, expected %0d", 14 + s, ch, r, EXP[s][ch]); end
    end
    #0.5 go = 1'b1;
    wait (done_a && done_b);
    checks += ca + cb + 2;
    failures += fa + fb;
    $display("rows from remainder cycles: %0d and %0d", ra, rb);
    if (ra == 0) begin failures++; $display("FAIL no remainder-cycle rows (first layer)"); end
    if (rb == 0) begin failures++; $display("FAIL no remainder-cycle rows (second layer)"); end
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
