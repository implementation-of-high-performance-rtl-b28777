// tb_pool_controller: the allocation example of 8 output slices x 5 channels
// at C = 14 (3 row units): in cycle k row unit r must load output row
// n = 3k + r (slice n/5, channel n%5), and the result window must open LAT
// cycles after the start for ceil(40/3) = 14 cycles.
module tb_pool_controller;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int HO = 8, D = 5, NRU = 3, LAT = 3, C = 14;
  logic rst, start, valid;
  logic load [NRU];
  logic [3:0] sl [NRU];
  logic [2:0] ch [NRU];
  logic [3:0] idx;
  pool_controller #(.H_O(HO), .D(D), .N_RU(NRU), .LAT(LAT), .C(C), .SW(4), .CHW(3)) dut (
    .clk(clk), .rst(rst), .i_start(start), .o_load(load), .o_slice(sl), .o_ch(ch),
    .o_valid(valid), .o_idx(idx));

  task automatic chk(input string w, input int got, input int exp, input int t);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s t=%0d got %0d exp %0d", w, t, got, exp); end
  endtask

  initial begin
    rst = 1; start = 0;
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    for (int t = 0; t < 2 * C + 6; t++) begin
      int k;
      start = (t == 0 || t == C);
      k = (t >= C) ? t - C : t;
      #0.5;
      for (int r = 0; r < NRU; r++) begin
        int n; n = 3 * k + r;
        chk("load", int'(load[r]), int'(n < HO * D), t);
        if (n < HO * D) begin
          chk("slice", int'(sl[r]), n / D, t);
          chk("channel", int'(ch[r]), n % D, t);
        end
      end
      begin
        int q; q = (t >= C + LAT) ? t - C - LAT : t - LAT;
        chk("valid", int'(valid), int'(q >= 0 && q < 14), t);
        if (q >= 0 && q < 14) chk("idx", int'(idx), q, t);
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
