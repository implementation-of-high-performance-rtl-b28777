// tb_dense_layer: 7 inputs, 20 neurons, C = 8, P = 2. This gives 3 neuron
// units (interleaved neurons, 7 slots each) with 4-stage pipelines, one of
// them using the alignment register. Weights are loaded through the write
// port, then three data sets are streamed back to back, one every C cycles,
// stage s inputs written in cycle s of each data set. Every neuron must be
// written exactly once per data set, in cycle start + LAT + n/3 with
// LAT = S + 3 + ceil(log2 P) + 1 = 9, carrying relu(rescale(W*i)).
// A second instance with the linear activation checks negative results.
module tb_dense_layer;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int N_I = 7, N_N = 20, C = 8, P = 2, S = 4, NNU = 3, LAT = 9, ND = 3;
  logic rst, start;
  logic in_we [N_I];
  val_t in [N_I];
  logic w_we;
  logic [4:0] w_n;
  logic [3:0] w_i;
  wgt_t w_d;
  val_t out_r [N_N], out_l [N_N];
  logic we_r [N_N], we_l [N_N];

  dense_layer #(.N_I(N_I), .N_N(N_N), .C(C), .P(P), .RELU(1'b1)) dut (.clk(clk), .rst(rst), .i_start(start),
    .i_in_we(in_we), .i_in(in), .i_w_we(w_we), .i_w_neuron(w_n), .i_w_input(w_i), .i_w_data(w_d),
    .o_out(out_r), .o_out_we(we_r));
  dense_layer #(.N_I(N_I), .N_N(N_N), .C(C), .P(P), .RELU(1'b0)) dut_lin (.clk(clk), .rst(rst), .i_start(start),
    .i_in_we(in_we), .i_in(in), .i_w_we(w_we), .i_w_neuron(w_n), .i_w_input(w_i), .i_w_data(w_d),
    .o_out(out_l), .o_out_we(we_l));

  int wv [N_N][N_I];
  int iv [ND][N_I];
  int ev [ND][N_N];
  int seen [ND][N_N];
  int cyc = 0;
  int t0;
  always @(posedge clk) cyc <= cyc + 1;

  // output monitor
  always @(negedge clk) if (!rst) begin
    for (int n = 0; n < N_N; n++) begin
      if (we_r[n]) begin
        int ds, exp_c;
        ds = (cyc - t0 - LAT - n / NNU) / C;
        exp_c = t0 + ds * C + LAT + n / NNU;
        checks++;
        if (ds < 0 || ds >= ND || cyc != exp_c) begin
          failures++; $display("FAIL timing n=%0d cyc=%0d", n, cyc);
        end else begin
          seen[ds][n]++;
          checks++;
          if (int'(out_r[n]) != ref_relu(ref_rescale(ev[ds][n]))) begin
            failures++; $display("FAIL relu ds=%0d n=%0d got %0d exp %0d", ds, n, out_r[n], ref_relu(ref_rescale(ev[ds][n])));
          end
          checks++;
          if (!we_l[n] || int'(out_l[n]) != ref_rescale(ev[ds][n])) begin
            failures++; $display("FAIL lin ds=%0d n=%0d", ds, n);
          end
        end
      end
    end
  end

  initial begin
    rst = 1; start = 0; w_we = 0;
    for (int i = 0; i < N_I; i++) in_we[i] = 0;
    for (int n = 0; n < N_N; n++) for (int i = 0; i < N_I; i++) wv[n][i] = rnd_wgt(300);
    for (int d = 0; d < ND; d++) begin
      for (int i = 0; i < N_I; i++) iv[d][i] = rnd_val(2000);
      for (int n = 0; n < N_N; n++) begin
        ev[d][n] = 0; seen[d][n] = 0;
        for (int i = 0; i < N_I; i++) ev[d][n] += iv[d][i] * wv[n][i];
      end
    end
    iv[1][0] = 8191; iv[1][1] = 8191;   // drive some sums into saturation
    for (int n = 0; n < N_N; n++) begin
      wv[n][0] = 511; wv[n][1] = 511;
      for (int d = 0; d < ND; d++) begin
        ev[d][n] = 0;
        for (int i = 0; i < N_I; i++) ev[d][n] += iv[d][i] * wv[n][i];
      end
    end
    repeat (2) @(posedge clk);
    #0.1 rst = 0;
    for (int n = 0; n < N_N; n++) for (int i = 0; i < N_I; i++) begin
      w_we = 1; w_n = 5'(n); w_i = 4'(i); w_d = wgt_t'(wv[n][i]);
      @(posedge clk); #0.1;
    end
    w_we = 0;
    repeat (3) @(posedge clk);
    #0.1;
    t0 = cyc;
    for (int t = 0; t < ND * C + LAT + C + 4; t++) begin
      int d, s;
      start = (t % C == 0) && (t / C < ND);
      d = t / C; s = t % C;
      for (int i = 0; i < N_I; i++) begin
        in_we[i] = (d < ND) && (i / P == s);
        in[i] = (d < ND) ? val_t'(iv[d][i]) : val_t'(0);
      end
      @(posedge clk); #0.1;
    end
    for (int d = 0; d < ND; d++) for (int n = 0; n < N_N; n++) begin
      checks++;
      if (seen[d][n] != 1) begin failures++; $display("FAIL neuron %0d of set %0d written %0d times", n, d, seen[d][n]); end
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
