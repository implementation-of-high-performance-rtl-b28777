// tb_maxpool2d_layer: 7x7x3 input, 3x2 pooling, C = 4, with the three padding
// modes side by side: 'same' (3x4 output, one padded row on top and one at
// the bottom, one padded column at the right; 3 row units), 'valid' (2x3,
// 2 row units) and 'unchanged' (3x4, padding only at the high edges). Three
// data sets are streamed one every C cycles. Every output row n must be
// written once per data set in cycle start + 1 + ceil(log2 6) + n / N_RU and
// hold the maximum of its window over the real (unpadded) inputs.
module tb_maxpool2d_layer;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int HI = 7, WI = 7, D = 3, HP = 3, WP = 2, C = 4, ND = 3, LAT = 4;
  logic rst, start;
  logic in_we [HI*D];
  val_t in [HI*D][WI];
  val_t o_s [3*D][4], o_v [2*D][3], o_u [3*D][4];
  logic we_s [3*D], we_v [2*D], we_u [3*D];

  maxpool2d_layer #(.H_I(HI), .W_I(WI), .D(D), .H_P(HP), .W_P(WP), .C(C), .PAD(PAD_SAME)) dut_s (
    .clk(clk), .rst(rst), .i_start(start), .i_in_we(in_we), .i_in(in), .o_out(o_s), .o_out_we(we_s));
  maxpool2d_layer #(.H_I(HI), .W_I(WI), .D(D), .H_P(HP), .W_P(WP), .C(C), .PAD(PAD_VALID)) dut_v (
    .clk(clk), .rst(rst), .i_start(start), .i_in_we(in_we), .i_in(in), .o_out(o_v), .o_out_we(we_v));
  maxpool2d_layer #(.H_I(HI), .W_I(WI), .D(D), .H_P(HP), .W_P(WP), .C(C), .PAD(PAD_UNCHANGED)) dut_u (
    .clk(clk), .rst(rst), .i_start(start), .i_in_we(in_we), .i_in(in), .o_out(o_u), .o_out_we(we_u));

  int img [ND][HI][WI][D];
  int seen [3][ND][3*D];
  int cyc = 0, t0 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic int ref_max(int ds, int o, int y, int c, int plh, int plw);
    int m; m = -100000;
    for (int a = 0; a < HP; a++) for (int b = 0; b < WP; b++) begin
      int h, w;
      h = o * HP - plh + a; w = y * WP - plw + b;
      if (h >= 0 && h < HI && w >= 0 && w < WI && img[ds][h][w][c] > m) m = img[ds][h][w][c];
    end
    return m;
  endfunction

  task automatic chk_row(int mode, int n, int nru, int wo, int plh, int plw, val_t row [4]);
    int o, c, rel, ds;
    o = n / D; c = n % D;
    rel = LAT + n / nru;
    ds = (cyc - t0 - rel) / C;
    checks++;
    if (ds < 0 || ds >= ND || cyc != t0 + ds * C + rel) begin
      failures++; $display("FAIL timing mode %0d row %0d cyc %0d", mode, n, cyc);
    end else begin
      seen[mode][ds][n]++;
      for (int y = 0; y < wo; y++) begin
        checks++;
        if (int'(row[y]) != ref_max(ds, o, y, c, plh, plw)) begin
          failures++; $display("FAIL mode %0d ds %0d row %0d y %0d got %0d exp %0d", mode, ds, n, y, row[y], ref_max(ds, o, y, c, plh, plw));
        end
      end
    end
  endtask

  always @(negedge clk) if (!rst && t0 > 0) begin
    for (int n = 0; n < 3*D; n++) if (we_s[n]) begin
      val_t r [4]; for (int y = 0; y < 4; y++) r[y] = o_s[n][y];
      chk_row(0, n, 3, 4, 1, 0, r);
    end
    for (int n = 0; n < 2*D; n++) if (we_v[n]) begin
      val_t r [4]; for (int y = 0; y < 4; y++) r[y] = (y < 3) ? o_v[n][y] : val_t'(0);
      chk_row(1, n, 2, 3, 0, 0, r);
    end
    for (int n = 0; n < 3*D; n++) if (we_u[n]) begin
      val_t r [4]; for (int y = 0; y < 4; y++) r[y] = o_u[n][y];
      chk_row(2, n, 3, 4, 0, 0, r);
    end
  end

  initial begin
    rst = 1; start = 0;
    for (int r = 0; r < HI*D; r++) in_we[r] = 0;
    for (int ds = 0; ds < ND; ds++) for (int h = 0; h < HI; h++) for (int w = 0; w < WI; w++)
      for (int c = 0; c < D; c++) img[ds][h][w][c] = rnd_val(8191);
    for (int m = 0; m < 3; m++) for (int ds = 0; ds < ND; ds++) for (int n = 0; n < 3*D; n++) seen[m][ds][n] = 0;
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    repeat (2) @(posedge clk);
    #0.1;
    t0 = cyc + 1;
    for (int t = -1; t < ND * C + LAT + C + 4; t++) begin
      int ds;
      ds = (t + 1) / C;
      start = (t >= 0) && (t % C == 0) && (t / C < ND);
      for (int h = 0; h < HI; h++) for (int c = 0; c < D; c++) begin
        in_we[h*D+c] = ((t + 1) % C == 0) && (ds < ND);
        for (int w = 0; w < WI; w++) in[h*D+c][w] = (ds < ND) ? val_t'(img[ds][h][w][c]) : val_t'(0);
      end
      @(posedge clk); #0.1;
    end
    for (int ds = 0; ds < ND; ds++) begin
      for (int n = 0; n < 3*D; n++) begin
        checks += 2;
        if (seen[0][ds][n] != 1) begin failures++; $display("FAIL same row %0d set %0d seen %0d", n, ds, seen[0][ds][n]); end
        if (seen[2][ds][n] != 1) begin failures++; $display("FAIL unchanged row %0d set %0d", n, ds); end
      end
      for (int n = 0; n < 2*D; n++) begin
        checks++;
        if (seen[1][ds][n] != 1) begin failures++; $display("FAIL valid row %0d set %0d", n, ds); end
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
