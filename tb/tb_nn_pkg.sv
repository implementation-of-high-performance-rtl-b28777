// tb_nn_pkg: checks the fixed-point helpers and schedule functions of
// nn_pkg against independently worked-out values, including the row-unit
// counts of the allocation examples (8x5 outputs at C = 14..19 need 3 row
// units; 19x11 at C = 15 needs 14).
module tb_nn_pkg;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    // rescale: random sums against the reference
    for (int n = 0; n < 2000; n++) begin
      longint a;
      a = longint'($urandom_range(32'h00ffffff)) - 64'sh0080_0000;
      if (n % 10 == 0) a = a * 8;     // some saturating values
      chk("rescale", int'(rescale(acc_t'(a))), ref_rescale(a));
    end
    chk("rescale max", int'(rescale(acc_t'(32'sh7fff_ffff))), 8191);
    chk("rescale min", int'(rescale(acc_t'(-32'sh7fff_ffff))), -8192);
    chk("cdiv", cdiv(10, 3), 4);
    chk("cdiv exact", cdiv(9, 3), 3);
    chk("clog2c 1", clog2c(1), 0);
    chk("clog2c 4", clog2c(4), 2);
    chk("clog2c 5", clog2c(5), 3);
    for (int c = 14; c <= 19; c++) chk("conv_n_ru fig", conv_n_ru(8, 5, c), 3);
    chk("conv_n_ru irregular example", conv_n_ru(19, 11, 15), 14);
    chk("pool valid", pool_out_dim(13, 2, PAD_VALID), 6);
    chk("pool same", pool_out_dim(13, 2, PAD_SAME), 7);
    chk("pool unchanged", pool_out_dim(13, 2, PAD_UNCHANGED), 7);
    chk("pad lo same", pool_pad_lo(13, 2, PAD_SAME), 0);
    chk("pad lo same 3", pool_pad_lo(7, 3, PAD_SAME), 1);
    chk("pad lo unchanged", pool_pad_lo(7, 3, PAD_UNCHANGED), 0);
    chk("dense latency", dense_latency(9, 1, 1), 13);
    chk("dense latency P3", dense_latency(7, 3, 0), 3 + 3 + 2);
    chk("conv latency", conv_latency(1, 2, 2, 1), 1 + 3 + 2 + 1);
    chk("conv_k", conv_k(7, 2, 3, 5), 2 * 5 + 2);
    chk("conv need first", conv_need_first(4, 1, 2, 3, 4, 3), 1 * 4 + 1);
    chk("conv need last", conv_need_last(4, 1, 2, 3, 4, 3), 2 * 4 + 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
