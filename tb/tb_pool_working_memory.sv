// tb_pool_working_memory: 5x5x2 buffer, 2x2 windows with one padded row and
// column in front; loads every (output slice, channel) in turn and checks
// every window position against the buffer, padded positions holding the
// most negative value.
module tb_pool_working_memory;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int HI = 5, WI = 5, D = 2, HP = 2, WP = 2, WO = 3;
  val_t bufm [HI*D][WI];
  logic load;
  logic [1:0] sl;
  logic ch;
  val_t win [HP][WO*WP];
  pool_working_memory #(.H_I(HI), .W_I(WI), .D(D), .H_P(HP), .W_P(WP), .W_O(WO), .PAD_LO_H(1),
    .PAD_LO_W(1), .SW(2), .CHW(1)) dut (.clk(clk), .i_buf(bufm), .i_load(load), .i_slice(sl),
    .i_ch(ch), .o_win(win));

  int bv [HI*D][WI];
  initial begin
    for (int r = 0; r < HI*D; r++) for (int w = 0; w < WI; w++) begin bv[r][w] = rnd_val(8191); bufm[r][w] = val_t'(bv[r][w]); end
    for (int o = 0; o < 3; o++) for (int c = 0; c < D; c++) begin
      load = 1; sl = 2'(o); ch = c[0];
      @(posedge clk); #0.1;
      load = 0; sl = 0; ch = 0;
      @(posedge clk); #0.1;
      for (int t = 0; t < HP; t++) for (int x = 0; x < WO*WP; x++) begin
        int h, w, e;
        h = o * HP - 1 + t; w = x - 1;
        e = (h >= 0 && h < HI && w >= 0 && w < WI) ? bv[h*D+c][w] : -8192;
        checks++;
        if (int'(win[t][x]) != e) begin failures++; $display("FAIL o=%0d c=%0d t=%0d x=%0d", o, c, t, x); end
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
