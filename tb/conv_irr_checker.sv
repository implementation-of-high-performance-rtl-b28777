// conv_irr_checker: testbench helper for tb_conv2d_irregular. It runs one
// conv2d_layer configuration in the irregular allocation case: loads random
// kernels, streams ND random images one every C cycles, and checks every
// output row against an integer reference convolution (relu after floor
// rescaling and clipping). Each output row must be written exactly once per
// image, LAT + k cycles after that image's start pulse, where k is the
// cycle in which its row unit computes it (nn_pkg::conv_alloc_k). o_done
// rises when all checks are complete; o_rem counts rows produced in the
// remainder cycles (k >= floor(C/D_O)*D_O).
module conv_irr_checker
  import nn_pkg::*;
  import tb_ref_pkg::*;
#(
  parameter int HI = 20, parameter int WI = 3, parameter int DI = 2,
  parameter int HK = 2, parameter int WK = 2, parameter int NK = 11, parameter int C = 15,
  parameter int ND = 3
) (
  input  logic clk,
  input  logic i_go,
  output logic o_done,
  output int   o_checks,
  output int   o_failures,
  output int   o_rem
);
  localparam int HO = HI - HK + 1, WO = WI - WK + 1;
  localparam int LAT = DI + 3 + $clog2(HK * WK) + 1;
  localparam int KW = (NK > 1) ? $clog2(NK) : 1, DW = (DI > 1) ? $clog2(DI) : 1;
  localparam int PW = (HK * WK > 1) ? $clog2(HK * WK) : 1;
  logic rst, start;
  logic in_we [HI*DI];
  val_t in [HI*DI][WI];
  logic w_we;
  logic [KW-1:0] w_k;
  logic [DW-1:0] w_d;
  logic [PW-1:0] w_pos;
  wgt_t w_data;
  val_t out [HO*NK][WO];
  logic out_we [HO*NK];

  conv2d_layer #(.H_I(HI), .W_I(WI), .D_I(DI), .H_K(HK), .W_K(WK), .N_K(NK), .C(C)) dut (
    .clk(clk), .rst(rst), .i_start(start), .i_in_we(in_we), .i_in(in), .i_w_we(w_we), .i_w_k(w_k),
    .i_w_d(w_d), .i_w_pos(w_pos), .i_w_data(w_data), .o_out(out), .o_out_we(out_we));

  int img [ND][HI][WI][DI];
  int wt [NK][HK][WK][DI];
  int seen [ND][HO*NK];
  int cyc = 0, t0 = 0, checks = 0, failures = 0, n_rem = 0;
  always @(posedge clk) cyc <= cyc + 1;
  assign o_checks = checks;
  assign o_failures = failures;
  assign o_rem = n_rem;

  function automatic int ref_out(int ds, int o, int x, int c);
    int s;
    s = 0;
    for (int kh = 0; kh < HK; kh++) for (int kw = 0; kw < WK; kw++) for (int d = 0; d < DI; d++)
      s += img[ds][o+kh][x+kw][d] * wt[c][kh][kw][d];
    return ref_relu(ref_rescale(s));
  endfunction

  always @(negedge clk) if (!rst) begin
    for (int n = 0; n < HO*NK; n++) if (out_we[n]) begin
      int o, c, rel, ds;
      o = n / NK; c = n % NK;
      rel = LAT + conv_alloc_k(HO, NK, C, n);
      ds = (cyc - t0 - rel) / C;
      checks++;
      if (ds < 0 || ds >= ND || cyc != t0 + ds * C + rel) begin
        failures++; $display("FAIL %m timing row %0d cyc %0d", n, cyc);
      end else begin
        seen[ds][n]++;
        if (rel - LAT >= (C / NK) * NK) n_rem++;
        for (int x = 0; x < WO; x++) begin
          checks++;
          if (int'(out[n][x]) != ref_out(ds, o, x, c)) begin
            failures++; $display("FAIL %m ds=%0d o=%0d x=%0d c=%0d got %0d exp %0d", ds, o, x, c, out[n][x], ref_out(ds, o, x, c));
          end
        end
      end
    end
  end

  initial begin
    rst = 1; start = 0; w_we = 0; w_k = '0; w_d = '0; w_pos = '0; w_data = '0; o_done = 0;
    for (int r = 0; r < HI*DI; r++) begin in_we[r] = 0; for (int x = 0; x < WI; x++) in[r][x] = '0; end
    for (int ds = 0; ds < ND; ds++) for (int h = 0; h < HI; h++) for (int x = 0; x < WI; x++)
      for (int d = 0; d < DI; d++) img[ds][h][x][d] = rnd_val(1500);
    for (int c = 0; c < NK; c++) for (int kh = 0; kh < HK; kh++) for (int kw = 0; kw < WK; kw++)
      for (int d = 0; d < DI; d++) wt[c][kh][kw][d] = rnd_wgt(400);
    for (int ds = 0; ds < ND; ds++) for (int n = 0; n < HO*NK; n++) seen[ds][n] = 0;
    wait (i_go);
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    for (int c = 0; c < NK; c++) for (int kh = 0; kh < HK; kh++) for (int kw = 0; kw < WK; kw++)
      for (int d = 0; d < DI; d++) begin
        w_we = 1; w_k = KW'(c); w_d = DW'(d); w_pos = PW'(kh * WK + kw); w_data = wgt_t'(wt[c][kh][kw][d]);
        @(posedge clk); #0.1;
      end
    w_we = 0;
    repeat (2) @(posedge clk);
    #0.1;
    t0 = cyc + 1;
    for (int t = -1; t < ND * C + LAT + C + 4; t++) begin
      int ds;
      ds = (t + 1) / C;
      start = (t >= 0) && (t % C == 0) && (t / C < ND);
      for (int h = 0; h < HI; h++) for (int d = 0; d < DI; d++) begin
        in_we[h*DI+d] = ((t + 1) % C == 0) && (ds < ND);
        for (int x = 0; x < WI; x++) in[h*DI+d][x] = (ds < ND) ? val_t'(img[ds][h][x][d]) : val_t'(0);
      end
      @(posedge clk); #0.1;
    end
    for (int ds = 0; ds < ND; ds++) for (int n = 0; n < HO*NK; n++) begin
      checks++;
      if (seen[ds][n] != 1) begin failures++; $display("FAIL %m row %0d of set %0d written %0d times", n, ds, seen[ds][n]); end
    end
    o_done = 1;
  end
endmodule
