// tb_pool_row_unit: random 3x2 windows for 4 output positions every cycle;
// each output must be its window's maximum ceil(log2 6) = 3 cycles later.
module tb_pool_row_unit;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int HP = 3, WP = 2, WO = 4, L = 3;
  val_t win [HP][WO*WP];
  val_t mx [WO];
  pool_row_unit #(.H_P(HP), .W_P(WP), .W_O(WO)) dut (.clk(clk), .i_win(win), .o_max(mx));

  int ev [100][WO];
  initial begin
    for (int t = 0; t < 100; t++) begin
      for (int x = 0; x < WO; x++) ev[t][x] = -100000;
      for (int a = 0; a < HP; a++) for (int x = 0; x < WO*WP; x++) begin
        int v; v = rnd_val(8191);
        win[a][x] = val_t'(v);
        if (v > ev[t][x / WP]) ev[t][x / WP] = v;
      end
      #0.5;
      if (t >= L) for (int x = 0; x < WO; x++) begin
        checks++;
        if (int'(mx[x]) != ev[t-L][x]) begin failures++; $display("FAIL t=%0d x=%0d", t, x); end
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
