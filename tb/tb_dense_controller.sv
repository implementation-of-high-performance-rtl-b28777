// tb_dense_controller: two start pulses C cycles apart; checks that the
// stage-s weight address in cycle t is (t - start - s) mod C, and that the
// result window opens LAT cycles after each start for N_SLOTS cycles with
// slot indices 0, 1, 2, ...
module tb_dense_controller;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int C = 8, S = 4, NS = 6, LAT = 10;
  logic rst, start, valid;
  logic [2:0] waddr [S];
  logic [2:0] idx;
  dense_controller #(.C(C), .S(S), .N_SLOTS(NS), .LAT(LAT)) dut (.clk(clk), .rst(rst), .i_start(start),
    .o_waddr(waddr), .o_valid(valid), .o_idx(idx));

  initial begin
    rst = 1; start = 0;
    repeat (3) @(posedge clk);
    #0.1 rst = 0;
    for (int t = 0; t < 40; t++) begin
      start = (t == 0 || t == C);
      #0.5;
      for (int s = 0; s < S; s++)
        if (t >= s) begin
          checks++;
          if (int'(waddr[s]) != (t - s) % C) begin failures++; $display("FAIL addr t=%0d s=%0d", t, s); end
        end
      begin
        bit ev; int ei;
        ev = 0; ei = 0;
        if (t >= LAT && t < LAT + NS) begin ev = 1; ei = t - LAT; end
        if (t >= LAT + C && t < LAT + C + NS) begin ev = 1; ei = t - LAT - C; end
        checks++;
        if (valid != ev || (ev && int'(idx) != ei)) begin failures++; $display("FAIL valid t=%0d", t); end
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
