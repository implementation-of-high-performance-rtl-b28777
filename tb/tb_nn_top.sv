// tb_nn_top: end-to-end test of the complete network at its default size
// (7x7x1 image, 2x2 convolution, 2x2 pooling, 9 -> 10 relu -> 10 linear,
// C = 16), with no parameter overrides.
//
// Random weights are loaded through the three weight ports, then ND images
// are written back to back, one every C = 16 cycles, so several images are
// in flight in the layer pipeline at once. A reference model computes the
// network in plain integer arithmetic (exact sums, floor division by 2^8,
// clipping to 14 bits, relu). Every output neuron n of image j must appear
// exactly once, with o_out_we, in cycle t_j + LATENCY + n / N_NU2, where
// t_j is the image's write cycle. LATENCY is checked against the value
// worked out by hand for this network (see EXP_LATENCY) and the output
// rate against one image per C cycles.
//
// Mechanisms counted (each must occur at least once): relu clipping in the
// convolution and in the hidden layer, saturation at any layer, images
// overlapping in the pipeline, and back-to-back images at the full rate.
module tb_nn_top;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int IH = 7, IW = 7, KH = 2, KW = 2, H1 = 6, W1 = 6, H2 = 3, W2 = 3;
  localparam int NF = 9, N1 = 10, N2 = 10, C = 16, NNU2 = 1, ND = 6;
  // schedule by hand, cycles after the image write: the convolution starts
  // in cycle 1 (its first buffer read) and, with one row unit and a latency
  // of 1+3+2+1 = 7, writes conv row k in cycle 8+k (rows 0..5: 8..13). Pool
  // row j is read in pooling cycle j and needs conv rows 2j, 2j+1, so row 2
  // (conv row 5, readable from 14) fixes the pooling start at 12; pool rows
  // appear in 12+3+j = 15..17. The regularizer reads flat input i in its
  // cycle i; inputs 0..2 (pool row 0, readable from 16) fix its start at
  // 16. The first dense layer starts one cycle later (17) and has latency
  // 9+3+0+1 = 13, the second starts at 30 with latency 10+3+0+1 = 14.
  localparam int EXP_LATENCY = 16 + 1 + 13 + 14;

  logic rst, in_valid;
  val_t image [IH][IW];
  logic cw_we, cw_k, cw_d;
  logic [1:0] cw_pos;
  wgt_t cw_data;
  logic d1_we, d2_we;
  logic [3:0] d1_n, d1_i, d2_n, d2_i;
  wgt_t d1_data, d2_data;
  val_t out [N2];
  logic out_we [N2];

  nn_top dut (
    .clk(clk), .rst(rst), .i_in_valid(in_valid), .i_image(image),
    .i_cw_we(cw_we), .i_cw_k(cw_k), .i_cw_d(cw_d), .i_cw_pos(cw_pos), .i_cw_data(cw_data),
    .i_d1_we(d1_we), .i_d1_neuron(d1_n), .i_d1_input(d1_i), .i_d1_data(d1_data),
    .i_d2_we(d2_we), .i_d2_neuron(d2_n), .i_d2_input(d2_i), .i_d2_data(d2_data),
    .o_out(out), .o_out_we(out_we));

  int img [ND][IH][IW];
  int cw [KH][KW];
  int w1 [N1][NF];
  int w2 [N2][N1];
  int expo [ND][N2];
  int seen [ND][N2];
  int t_in [ND];
  int cyc = 0;
  int n_relu_conv = 0, n_relu_d1 = 0, n_sat = 0, n_overlap = 0, n_backtoback = 0;
  int in_flight = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // rescale with saturation counting
  function automatic int rs(longint s);
    int r;
    r = ref_rescale(s);
    if ((s >= 0 && (s >> 8) > 8191) || (s < 0 && -((-s + 255) / 256) < -8192)) n_sat++;
    return r;
  endfunction

  task automatic ref_model(int j);
    int c1 [H1][W1];
    int p1 [H2][W2];
    int f [NF];
    int h [N1];
    for (int o = 0; o < H1; o++) for (int x = 0; x < W1; x++) begin
      longint s; int v;
      s = 0;
      for (int a = 0; a < KH; a++) for (int b = 0; b < KW; b++) s += longint'(img[j][o+a][x+b] * cw[a][b]);
      v = rs(s);
      if (v < 0) n_relu_conv++;
      c1[o][x] = ref_relu(v);
    end
    for (int o = 0; o < H2; o++) for (int x = 0; x < W2; x++) begin
      int m; m = -8192;
      for (int a = 0; a < 2; a++) for (int b = 0; b < 2; b++)
        if (c1[2*o+a][2*x+b] > m) m = c1[2*o+a][2*x+b];
      p1[o][x] = m;
      f[o*W2 + x] = m;                 // one channel: i = o*W + y
    end
    for (int n = 0; n < N1; n++) begin
      longint s; int v;
      s = 0;
      for (int i = 0; i < NF; i++) s += longint'(f[i] * w1[n][i]);
      v = rs(s);
      if (v < 0) n_relu_d1++;
      h[n] = ref_relu(v);
    end
    for (int n = 0; n < N2; n++) begin
      longint s;
      s = 0;
      for (int i = 0; i < N1; i++) s += longint'(h[i] * w2[n][i]);
      expo[j][n] = rs(s);
    end
  endtask

  // output monitor
  always @(negedge clk) if (!rst) begin
    for (int n = 0; n < N2; n++) if (out_we[n]) begin
      int j; bit hit;
      hit = 0;
      for (int q = 0; q < ND; q++)
        if (cyc == t_in[q] + EXP_LATENCY + n / NNU2) begin j = q; hit = 1; end
      checks++;
      if (!hit) begin failures++; $display("FAIL neuron %0d written at unexpected cycle %0d", n, cyc); end
      else begin
        seen[j][n]++;
        checks++;
        if (int'(out[n]) != expo[j][n]) begin
          failures++; $display("FAIL image %0d neuron %0d got %0d exp %0d", j, n, out[n], expo[j][n]);
        end
      end
    end
  end

  initial begin
    rst = 1; in_valid = 0; cw_we = 0; d1_we = 0; d2_we = 0;
    cw_k = 0; cw_d = 0; cw_pos = 0; cw_data = '0; d1_n = 0; d1_i = 0; d1_data = '0;
    d2_n = 0; d2_i = 0; d2_data = '0;
    for (int a = 0; a < IH; a++) for (int b = 0; b < IW; b++) image[a][b] = '0;
    for (int j = 0; j < ND; j++) begin
      t_in[j] = -1000;
      for (int n = 0; n < N2; n++) seen[j][n] = 0;
      for (int a = 0; a < IH; a++) for (int b = 0; b < IW; b++)
        img[j][a][b] = (j == ND - 1) ? 8191 - 1000 * ((a + b) % 2) : rnd_val(j < 2 ? 1500 : 8191);
    end
    for (int a = 0; a < KH; a++) for (int b = 0; b < KW; b++) cw[a][b] = rnd_wgt(400);
    cw[0][0] = 300;                      // keep the all-large image from clipping to zero
    for (int n = 0; n < N1; n++) for (int i = 0; i < NF; i++) w1[n][i] = rnd_wgt(300);
    for (int n = 0; n < N2; n++) for (int i = 0; i < N1; i++) w2[n][i] = rnd_wgt(300);
    for (int j = 0; j < ND; j++) ref_model(j);
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    // weight load, one weight per cycle on each port
    for (int a = 0; a < KH; a++) for (int b = 0; b < KW; b++) begin
      cw_we = 1; cw_pos = 2'(a * KW + b); cw_data = wgt_t'(cw[a][b]);
      @(posedge clk); #0.1;
    end
    cw_we = 0;
    for (int n = 0; n < N1; n++) for (int i = 0; i < NF; i++) begin
      d1_we = 1; d1_n = 4'(n); d1_i = 4'(i); d1_data = wgt_t'(w1[n][i]);
      @(posedge clk); #0.1;
    end
    d1_we = 0;
    for (int n = 0; n < N2; n++) for (int i = 0; i < N1; i++) begin
      d2_we = 1; d2_n = 4'(n); d2_i = 4'(i); d2_data = wgt_t'(w2[n][i]);
      @(posedge clk); #0.1;
    end
    d2_we = 0;
    repeat (3) @(posedge clk);
    #0.1;
    // images back to back, one every C cycles
    for (int j = 0; j < ND; j++) begin
      in_valid = 1;
      for (int a = 0; a < IH; a++) for (int b = 0; b < IW; b++) image[a][b] = val_t'(img[j][a][b]);
      t_in[j] = cyc;
      if (j > 0 && t_in[j] - t_in[j-1] == C) n_backtoback++;
      for (int q = 0; q < j; q++) if (t_in[q] + EXP_LATENCY + N2 > cyc) n_overlap++;
      @(posedge clk); #0.1;
      in_valid = 0;
      for (int a = 0; a < IH; a++) for (int b = 0; b < IW; b++) image[a][b] = val_t'(rnd_val(8191));
      repeat (C - 1) @(posedge clk);
      #0.1;
    end
    repeat (EXP_LATENCY + N2 + 4) @(posedge clk);
    #0.1;
    checks++;
    if (dut.LATENCY != EXP_LATENCY) begin
      failures++; $display("FAIL design latency %0d, expected %0d", dut.LATENCY, EXP_LATENCY);
    end
    for (int j = 0; j < ND; j++) for (int n = 0; n < N2; n++) begin
      checks++;
      if (seen[j][n] != 1) begin failures++; $display("FAIL image %0d neuron %0d seen %0d times", j, n, seen[j][n]); end
    end
    $display("latency %0d cycles, one image every %0d cycles", EXP_LATENCY, C);
    $display("mechanisms: relu clip conv %0d, relu clip hidden %0d, saturation %0d, overlapping images %0d, back-to-back images %0d",
             n_relu_conv, n_relu_d1, n_sat, n_overlap, n_backtoback);
    checks += 5;
    if (n_relu_conv == 0) begin failures++; $display("FAIL no relu clipping in convolution"); end
    if (n_relu_d1 == 0) begin failures++; $display("FAIL no relu clipping in hidden layer"); end
    if (n_sat == 0) begin failures++; $display("FAIL no saturation"); end
    if (n_overlap == 0) begin failures++; $display("FAIL no overlapping images"); end
    if (n_backtoback == 0) begin failures++; $display("FAIL no back-to-back images"); end
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
