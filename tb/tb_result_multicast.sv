// tb_result_multicast: for the interleaved (GROUP = 1) and the convolution
// (GROUP = 3) orders, drives every cycle index and checks that exactly the
// output positions of the allocation scheme get a write enable and carry the
// right unit's data.
module tb_result_multicast;
  import nn_pkg::*;
  int checks = 0, failures = 0;

  localparam int NS = 3;
  val_t d [NS][2];
  logic valid;
  logic [4:0] idx;
  val_t o1 [10][2], o3 [13*3][2];
  logic we1 [10], we3 [13*3];
  result_multicast #(.N_SRC(NS), .N_DST(10), .ROW_W(2), .GROUP(1), .IW(5)) dut1 (
    .i_data(d), .i_valid(valid), .i_idx(idx), .o_data(o1), .o_we(we1));
  result_multicast #(.N_SRC(NS), .N_DST(39), .ROW_W(2), .GROUP(3), .IW(5)) dut3 (
    .i_data(d), .i_valid(valid), .i_idx(idx), .o_data(o3), .o_we(we3));

  initial begin
    for (int s = 0; s < NS; s++) begin d[s][0] = val_t'(100 + s); d[s][1] = val_t'(200 + s); end
    for (int v = 0; v < 2; v++)
      for (int k = 0; k < 16; k++) begin
        valid = v[0]; idx = 5'(k);
        #1;
        for (int n = 0; n < 10; n++) begin
          bit e; int s;
          s = n % NS;
          e = valid && (n / NS == k);
          checks++;
          if (we1[n] != e || int'(o1[n][1]) != 200 + s) begin failures++; $display("FAIL g1 k=%0d n=%0d", k, n); end
        end
        for (int n = 0; n < 39; n++) begin
          bit e; int o, c, s;
          o = n / 3; c = n % 3; s = o % NS;
          e = valid && ((o / NS) * 3 + c == k);
          checks++;
          if (we3[n] != e || int'(o3[n][0]) != 100 + s) begin failures++; $display("FAIL g3 k=%0d n=%0d", k, n); end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
