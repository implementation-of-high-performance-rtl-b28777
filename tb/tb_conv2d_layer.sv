// tb_conv2d_layer: convolution of a 15x6x2 input with two 3x2x2 kernels at
// C = 6: 13x5x2 outputs, N_RU = 5 row units, 3 long (3 slice ranges) and 2
// short, so both working memories and both weight-memory groups are used.
// Three data sets are streamed one every C cycles (image written in the
// cycle before each start pulse). Each output row (o, c) must be written
// exactly once per data set, in cycle start + LAT + (o/5)*2 + c with
// LAT = D_I + 3 + ceil(log2 6) + 1 = 9, with relu(rescale(sum)).
module tb_conv2d_layer;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int HI = 15, WI = 6, DI = 2, HK = 3, WK = 2, NK = 2, C = 6;
  localparam int HO = 13, WO = 5, NRU = 5, LAT = 9, ND = 3;
  logic rst, start;
  logic in_we [HI*DI];
  val_t in [HI*DI][WI];
  logic w_we;
  logic w_k, w_d;
  logic [2:0] w_pos;
  wgt_t w_data;
  val_t out [HO*NK][WO];
  logic out_we [HO*NK];

  conv2d_layer #(.H_I(HI), .W_I(WI), .D_I(DI), .H_K(HK), .W_K(WK), .N_K(NK), .C(C)) dut (
    .clk(clk), .rst(rst), .i_start(start), .i_in_we(in_we), .i_in(in), .i_w_we(w_we), .i_w_k(w_k),
    .i_w_d(w_d), .i_w_pos(w_pos), .i_w_data(w_data), .o_out(out), .o_out_we(out_we));

  int img [ND][HI][WI][DI];
  int wt [NK][HK][WK][DI];
  int seen [ND][HO*NK];
  int cyc = 0, t0 = 0, long_rows = 0, short_rows = 0;
  always @(posedge clk) cyc <= cyc + 1;

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
      rel = LAT + (o / NRU) * NK + c;
      ds = (cyc - t0 - rel) / C;
      checks++;
      if (ds < 0 || ds >= ND || cyc != t0 + ds * C + rel) begin
        failures++; $display("FAIL timing row %0d cyc %0d", n, cyc);
      end else begin
        seen[ds][n]++;
        if ((o % NRU) < 3) long_rows++; else short_rows++;
        for (int x = 0; x < WO; x++) begin
          checks++;
          if (int'(out[n][x]) != ref_out(ds, o, x, c)) begin
            failures++; $display("FAIL ds=%0d o=%0d x=%0d c=%0d got %0d exp %0d", ds, o, x, c, out[n][x], ref_out(ds, o, x, c));
          end
        end
      end
    end
  end

  initial begin
    rst = 1; start = 0; w_we = 0;
    for (int r = 0; r < HI*DI; r++) in_we[r] = 0;
    for (int ds = 0; ds < ND; ds++) for (int h = 0; h < HI; h++) for (int x = 0; x < WI; x++)
      for (int d = 0; d < DI; d++) img[ds][h][x][d] = rnd_val(1500);
    for (int c = 0; c < NK; c++) for (int kh = 0; kh < HK; kh++) for (int kw = 0; kw < WK; kw++)
      for (int d = 0; d < DI; d++) wt[c][kh][kw][d] = rnd_wgt(400);
    for (int ds = 0; ds < ND; ds++) for (int n = 0; n < HO*NK; n++) seen[ds][n] = 0;
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    for (int c = 0; c < NK; c++) for (int kh = 0; kh < HK; kh++) for (int kw = 0; kw < WK; kw++)
      for (int d = 0; d < DI; d++) begin
        w_we = 1; w_k = c[0]; w_d = d[0]; w_pos = 3'(kh * WK + kw); w_data = wgt_t'(wt[c][kh][kw][d]);
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
      if (seen[ds][n] != 1) begin failures++; $display("FAIL row %0d of set %0d written %0d times", n, ds, seen[ds][n]); end
    end
    checks++;
    if (long_rows == 0 || short_rows == 0) begin failures++; $display("FAIL long/short units not both used"); end
    $display("long-unit rows %0d, short-unit rows %0d", long_rows, short_rows);
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
