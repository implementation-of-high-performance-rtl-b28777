// tb_flatten_regularizer: 2x3x2 rows in, P = 2. Rows are written in a
// scrambled order before the start pulse; flat input i = o*6 + y*2 + c must
// come out with its write enable exactly in cycle start + i/2 + 1.
module tb_flatten_regularizer;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int H = 2, W = 3, D = 2, P = 2, N = 12;
  logic rst, start;
  logic in_we [H*D];
  val_t in [H*D][W];
  val_t out [N];
  logic we [N];
  flatten_regularizer #(.H(H), .W(W), .D(D), .P(P), .C(8)) dut (.clk(clk), .rst(rst), .i_start(start),
    .i_in_we(in_we), .i_in(in), .o_out(out), .o_out_we(we));

  int v [H][W][D];
  int cnt [N];
  initial begin
    rst = 1; start = 0;
    for (int r = 0; r < H*D; r++) in_we[r] = 0;
    for (int o = 0; o < H; o++) for (int y = 0; y < W; y++) for (int c = 0; c < D; c++) v[o][y][c] = rnd_val(8191);
    for (int i = 0; i < N; i++) cnt[i] = 0;
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    for (int q = H*D - 1; q >= 0; q--) begin       // reverse row order
      for (int r = 0; r < H*D; r++) in_we[r] = (r == q);
      for (int y = 0; y < W; y++) in[q][y] = val_t'(v[q / D][y][q % D]);
      @(posedge clk); #0.1;
    end
    for (int r = 0; r < H*D; r++) in_we[r] = 0;
    for (int t = 0; t < N / P + 4; t++) begin
      start = (t == 0);
      #0.5;
      for (int i = 0; i < N; i++) begin
        bit e; e = (t == i / P + 1);
        checks++;
        if (we[i] != e) begin failures++; $display("FAIL we t=%0d i=%0d", t, i); end
        if (e) begin
          int o, y, c;
          o = i / (W * D); y = (i / D) % W; c = i % D;
          cnt[i]++;
          checks++;
          if (int'(out[i]) != v[o][y][c]) begin failures++; $display("FAIL value i=%0d", i); end
        end
      end
      @(posedge clk); #0.1;
    end
    for (int i = 0; i < N; i++) begin
      checks++;
      if (cnt[i] != 1) begin failures++; $display("FAIL i=%0d emitted %0d times", i, cnt[i]); end
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
