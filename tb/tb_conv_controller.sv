// tb_conv_controller: D_I = 2, D_O = 3, N_RU = 2, 3 ranges (long) at C = 10,
// two start pulses C cycles apart. Checks against the allocation scheme:
// channel-d loads at cycles j*D_O + d with base j*N_RU (short memory only
// for j < 2), weight address of stage d = output channel of element t-d,
// and a result window of 9 cycles LAT cycles after each start.
module tb_conv_controller;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int C = 10, DI = 2, DO = 3, NRU = 2, RL = 3, LAT = 7, HI = 9;
  logic rst, start, valid;
  logic ll [DI], ls [DI];
  logic [3:0] base [DI];
  logic [1:0] waddr [DI];
  logic [3:0] idx;
  conv_controller #(.C(C), .D_I(DI), .D_O(DO), .N_RU(NRU), .R_LONG(RL), .LAT(LAT), .H_I(HI)) dut (
    .clk(clk), .rst(rst), .i_start(start), .o_load_long(ll), .o_load_short(ls), .o_base(base),
    .o_waddr(waddr), .o_valid(valid), .o_idx(idx));

  task automatic chk(input string w, input int got, input int exp, input int t);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s t=%0d got %0d exp %0d", w, t, got, exp); end
  endtask

  initial begin
    rst = 1; start = 0;
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    for (int t = 0; t < 2 * C + LAT + 4; t++) begin
      start = (t == 0 || t == C);
      #0.5;
      for (int d = 0; d < DI; d++) begin
        int k, el, es, j;
        k = (t < C) ? t - d : t - C - d;
        if (t >= C && t - C - d < 0) k = t - d;   // still finishing the first set
        j = (k >= 0) ? k / DO : -1;
        el = (k >= 0 && k % DO == 0 && j < RL);
        es = (k >= 0 && k % DO == 0 && j < RL - 1);
        chk("load long", int'(ll[d]), el, t);
        chk("load short", int'(ls[d]), es, t);
        if (el) chk("base", int'(base[d]), j * NRU, t);
        if (k >= 0 && k < RL * DO) chk("waddr", int'(waddr[d]), k % DO, t);
      end
      begin
        int r; r = (t >= C + LAT) ? t - C - LAT : t - LAT;
        chk("valid", int'(valid), int'(r >= 0 && r < RL * DO), t);
        if (r >= 0 && r < RL * DO) chk("idx", int'(idx), r, t);
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
