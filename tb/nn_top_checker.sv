// nn_top_checker: testbench helper that runs one configuration of nn_top
// end to end. It is instantiated by tb_nn_workloads, once per network.
//
// After i_go it loads random weights through the three weight ports, writes
// ND random images back to back (one every C cycles) and compares every
// output neuron with an integer reference model of the network (exact sums,
// floor division by 2^8, clipping to 14 bits, relu on all but the last
// layer, max pooling with 'same' padding, C-order flattening). Each neuron n
// of image j must appear exactly once, in cycle t_j + LATENCY + n / N_NU2,
// where LATENCY is the network's own latency and t_j = t_0 + j*C, so the
// output rate is one image per C cycles. o_done goes high when all checks
// are complete; o_checks / o_failures hold the counts. It also counts relu
// clipping and saturation events and how many images were in flight
// together, for the caller to report.
module nn_top_checker
  import nn_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int IN_H = 7, parameter int IN_W = 7, parameter int IN_D = 1,
  parameter int K_H = 2, parameter int K_W = 2, parameter int N_K = 1,
  parameter int P_H = 2, parameter int P_W = 2,
  parameter int N1 = 10, parameter int N2 = 10, parameter int C = 16, parameter int P1 = 1,
  parameter int ND = 4
) (
  input  logic clk,
  input  logic i_go,
  output logic o_done,
  output int   o_checks,
  output int   o_failures,
  output int   o_relu,
  output int   o_sat,
  output int   o_overlap
);
  localparam int H1 = IN_H - K_H + 1, W1 = IN_W - K_W + 1;
  localparam int H2 = (H1 + P_H - 1) / P_H, W2 = (W1 + P_W - 1) / P_W;   // 'same'
  localparam int PH_LO = (H2 * P_H - H1) / 2, PW_LO = (W2 * P_W - W1) / 2;
  localparam int NF = H2 * W2 * N_K;
  localparam int NNU2 = (N2 + C - 1) / C;
  localparam int KKW = (N_K > 1) ? $clog2(N_K) : 1;
  localparam int KDW = (IN_D > 1) ? $clog2(IN_D) : 1;
  localparam int KPW = (K_H*K_W > 1) ? $clog2(K_H*K_W) : 1;
  localparam int N1W = $clog2(N1 + 1), NFW = $clog2(NF + 1), N2W = $clog2(N2 + 1);

  logic rst, in_valid;
  val_t image [IN_H*IN_D][IN_W];
  logic cw_we, d1_we, d2_we;
  logic [KKW-1:0] cw_k;
  logic [KDW-1:0] cw_d;
  logic [KPW-1:0] cw_pos;
  logic [N1W-1:0] d1_n, d2_i;
  logic [NFW-1:0] d1_i;
  logic [N2W-1:0] d2_n;
  wgt_t cw_data, d1_data, d2_data;
  val_t out [N2];
  logic out_we [N2];

  nn_top #(.IN_H(IN_H), .IN_W(IN_W), .IN_D(IN_D), .K_H(K_H), .K_W(K_W), .N_K(N_K), .P_H(P_H),
           .P_W(P_W), .PAD(PAD_SAME), .N1(N1), .N2(N2), .C(C), .P1(P1)) dut (
    .clk(clk), .rst(rst), .i_in_valid(in_valid), .i_image(image),
    .i_cw_we(cw_we), .i_cw_k(cw_k), .i_cw_d(cw_d), .i_cw_pos(cw_pos), .i_cw_data(cw_data),
    .i_d1_we(d1_we), .i_d1_neuron(d1_n), .i_d1_input(d1_i), .i_d1_data(d1_data),
    .i_d2_we(d2_we), .i_d2_neuron(d2_n), .i_d2_input(d2_i), .i_d2_data(d2_data),
    .o_out(out), .o_out_we(out_we));

  int img [ND][IN_H][IN_W][IN_D];
  int cw [N_K][IN_D][K_H][K_W];
  int w1 [N1][NF];
  int w2 [N2][N1];
  int expo [ND][N2];
  int seen [ND][N2];
  int t_in [ND];
  int cyc = 0;
  int checks = 0, failures = 0, n_relu = 0, n_sat = 0, n_overlap = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign o_checks = checks;
  assign o_failures = failures;
  assign o_relu = n_relu;
  assign o_sat = n_sat;
  assign o_overlap = n_overlap;

  function automatic int rs(longint s);
    if ((s >= 0 && (s >> 8) > 8191) || (s < 0 && -((-s + 255) / 256) < -8192)) n_sat++;
    return ref_rescale(s);
  endfunction

  function automatic int act(int v);
    if (v < 0) n_relu++;
    return ref_relu(v);
  endfunction

  task automatic ref_model(int j);
    int c1 [H1][W1][N_K];
    int f [NF];
    int h [N1];
    for (int o = 0; o < H1; o++) for (int x = 0; x < W1; x++) for (int k = 0; k < N_K; k++) begin
      longint s;
      s = 0;
      for (int a = 0; a < K_H; a++) for (int b = 0; b < K_W; b++) for (int d = 0; d < IN_D; d++)
        s += longint'(img[j][o+a][x+b][d] * cw[k][d][a][b]);
      c1[o][x][k] = act(rs(s));
    end
    for (int o = 0; o < H2; o++) for (int y = 0; y < W2; y++) for (int k = 0; k < N_K; k++) begin
      int m; m = -8192;
      for (int a = 0; a < P_H; a++) for (int b = 0; b < P_W; b++) begin
        int hh, ww;
        hh = o * P_H - PH_LO + a; ww = y * P_W - PW_LO + b;
        if (hh >= 0 && hh < H1 && ww >= 0 && ww < W1 && c1[hh][ww][k] > m) m = c1[hh][ww][k];
      end
      f[o*W2*N_K + y*N_K + k] = m;
    end
    for (int n = 0; n < N1; n++) begin
      longint s;
      s = 0;
      for (int i = 0; i < NF; i++) s += longint'(f[i] * w1[n][i]);
      h[n] = act(rs(s));
    end
    for (int n = 0; n < N2; n++) begin
      longint s;
      s = 0;
      for (int i = 0; i < N1; i++) s += longint'(h[i] * w2[n][i]);
      expo[j][n] = rs(s);
    end
  endtask

  always @(negedge clk) if (!rst) begin
    for (int n = 0; n < N2; n++) if (out_we[n]) begin
      int j; bit hit;
      hit = 0; j = 0;
      for (int q = 0; q < ND; q++)
        if (cyc == t_in[q] + dut.LATENCY + n / NNU2) begin j = q; hit = 1; end
      checks++;
      if (!hit) begin failures++; $display("FAIL %m neuron %0d at unexpected cycle %0d", n, cyc); end
      else begin
        seen[j][n]++;
        checks++;
        if (int'(out[n]) != expo[j][n]) begin
          failures++; $display("FAIL %m image %0d neuron %0d got %0d exp %0d", j, n, out[n], expo[j][n]);
        end
      end
    end
  end

  initial begin
    rst = 1; in_valid = 0; o_done = 0;
    cw_we = 0; d1_we = 0; d2_we = 0; cw_k = '0; cw_d = '0; cw_pos = '0; cw_data = '0;
    d1_n = '0; d1_i = '0; d1_data = '0; d2_n = '0; d2_i = '0; d2_data = '0;
    for (int r = 0; r < IN_H*IN_D; r++) for (int x = 0; x < IN_W; x++) image[r][x] = '0;
    for (int j = 0; j < ND; j++) begin
      t_in[j] = -100000;
      for (int n = 0; n < N2; n++) seen[j][n] = 0;
      for (int a = 0; a < IN_H; a++) for (int b = 0; b < IN_W; b++) for (int d = 0; d < IN_D; d++)
        img[j][a][b][d] = rnd_val(j == 0 ? 8191 : 2500);
    end
    for (int k = 0; k < N_K; k++) for (int d = 0; d < IN_D; d++) for (int a = 0; a < K_H; a++)
      for (int b = 0; b < K_W; b++) cw[k][d][a][b] = rnd_wgt(400);
    for (int n = 0; n < N1; n++) for (int i = 0; i < NF; i++) w1[n][i] = rnd_wgt(200);
    for (int n = 0; n < N2; n++) for (int i = 0; i < N1; i++) w2[n][i] = rnd_wgt(300);
    for (int j = 0; j < ND; j++) ref_model(j);
    wait (i_go);
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    for (int k = 0; k < N_K; k++) for (int d = 0; d < IN_D; d++) for (int a = 0; a < K_H; a++)
      for (int b = 0; b < K_W; b++) begin
        cw_we = 1; cw_k = KKW'(k); cw_d = KDW'(d); cw_pos = KPW'(a * K_W + b); cw_data = wgt_t'(cw[k][d][a][b]);
        @(posedge clk); #0.1;
      end
    cw_we = 0;
    for (int n = 0; n < N1; n++) for (int i = 0; i < NF; i++) begin
      d1_we = 1; d1_n = N1W'(n); d1_i = NFW'(i); d1_data = wgt_t'(w1[n][i]);
      @(posedge clk); #0.1;
    end
    d1_we = 0;
    for (int n = 0; n < N2; n++) for (int i = 0; i < N1; i++) begin
      d2_we = 1; d2_n = N2W'(n); d2_i = N1W'(i); d2_data = wgt_t'(w2[n][i]);
      @(posedge clk); #0.1;
    end
    d2_we = 0;
    repeat (3) @(posedge clk);
    #0.1;
    for (int j = 0; j < ND; j++) begin
      in_valid = 1;
      for (int a = 0; a < IN_H; a++) for (int d = 0; d < IN_D; d++) for (int b = 0; b < IN_W; b++)
        image[a*IN_D + d][b] = val_t'(img[j][a][b][d]);
      t_in[j] = cyc;
      for (int q = 0; q < j; q++) if (t_in[q] + dut.LATENCY + N2 > cyc) n_overlap++;
      @(posedge clk); #0.1;
      in_valid = 0;
      repeat (C - 1) @(posedge clk);
      #0.1;
    end
    repeat (dut.LATENCY + N2 + 4) @(posedge clk);
    #0.1;
    for (int j = 0; j < ND; j++) for (int n = 0; n < N2; n++) begin
      checks++;
      if (seen[j][n] != 1) begin failures++; $display("FAIL %m image %0d neuron %0d seen %0d times", j, n, seen[j][n]); end
    end
    $display("%m: latency %0d cycles at C = %0d", dut.LATENCY, C);
    o_done = 1;
  end
endmodule
