// tb_nn_workloads: runs two further MNIST networks of the same layer
// sequence as the default one, each through nn_top_checker (random weights
// and images, integer reference model, exact output cycles):
//  * a 14x14 input with one 2x2 kernel, 2x2 pooling ('same', 7x7x1), a
//    7-neuron hidden layer and 10 outputs at C = 14; the first dense layer
//    takes P = 7 inputs per cycle (one pooled row);
//  * a 7x7 input with three 2x2 kernels (two row units, 6x6x3), 2x2 pooling,
//    a 16-neuron hidden layer (two neuron units, so the output layer runs
//    with P = 2) and 10 outputs at C = 14, first dense layer P = 3.
//  * three networks whose convolution needs the irregular allocation
//    (14x14 input, 2x2 kernels, hidden layer 17/25/50 neurons):
//    2 kernels at C = 13, 4 kernels at C = 13, and 3x3x4 kernels at C = 11;
//    the first dense layer takes one pooled slice (all its columns and
//    channels) per cycle.
// All run concurrently on one clock. Relu clipping, saturation and images
// overlapping in the pipeline must each occur in every network.
module tb_nn_workloads;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  logic go = 1'b0;
  logic done_a, done_b;
  int ca, fa, ra, sa, oa, cb, fb, rb, sb, ob;
  logic done_i [3];
  int ci [3], fi [3], ri [3], si [3], oi [3];

  nn_top_checker #(.IN_H(14), .IN_W(14), .N_K(1), .N1(7), .C(14), .P1(7), .ND(4)) u_a (
    .clk(clk), .i_go(go), .o_done(done_a), .o_checks(ca), .o_failures(fa), .o_relu(ra), .o_sat(sa), .o_overlap(oa));
  nn_top_checker #(.IN_H(7), .IN_W(7), .N_K(3), .N1(16), .C(14), .P1(3), .ND(4)) u_b (
    .clk(clk), .i_go(go), .o_done(done_b), .o_checks(cb), .o_failures(fb), .o_relu(rb), .o_sat(sb), .o_overlap(ob));

  nn_top_checker #(.IN_H(14), .IN_W(14), .N_K(2), .N1(17), .C(13), .P1(14), .ND(3)) u_c (
    .clk(clk), .i_go(go), .o_done(done_i[0]), .o_checks(ci[0]), .o_failures(fi[0]), .o_relu(ri[0]), .o_sat(si[0]), .o_overlap(oi[0]));
  nn_top_checker #(.IN_H(14), .IN_W(14), .N_K(4), .N1(25), .C(13), .P1(28), .ND(3)) u_d (
    .clk(clk), .i_go(go), .o_done(done_i[1]), .o_checks(ci[1]), .o_failures(fi[1]), .o_relu(ri[1]), .o_sat(si[1]), .o_overlap(oi[1]));
  nn_top_checker #(.IN_H(14), .IN_W(14), .K_H(3), .K_W(3), .N_K(4), .N1(50), .C(11), .P1(24), .ND(3)) u_e (
    .clk(clk), .i_go(go), .o_done(done_i[2]), .o_checks(ci[2]), .o_failures(fi[2]), .o_relu(ri[2]), .o_sat(si[2]), .o_overlap(oi[2]));

  initial begin
    #0.5 go = 1'b1;
    wait (done_a && done_b && done_i[0] && done_i[1] && done_i[2]);
    checks = ca + cb;
    failures = fa + fb;
    for (int i = 0; i < 3; i++) begin
      checks += ci[i] + 3;
      failures += fi[i];
      $display("irregular network %0d: relu clip %0d, saturation %0d, overlapping images %0d", i, ri[i], si[i], oi[i]);
      if (ri[i] == 0) begin failures++; $display("FAIL no relu clipping"); end
      if (si[i] == 0) begin failures++; $display("FAIL no saturation"); end
      if (oi[i] == 0) begin failures++; $display("FAIL no overlapping images"); end
    end
    $display("14x14 network: relu clip %0d, saturation %0d, overlapping images %0d", ra, sa, oa);
    $display("3-kernel network: relu clip %0d, saturation %0d, overlapping images %0d", rb, sb, ob);
    checks += 6;
    if (ra == 0 || rb == 0) begin failures++; $display("FAIL no relu clipping"); end
    if (sa == 0 || sb == 0) begin failures++; $display("FAIL no saturation"); end
    if (oa == 0 || ob == 0) begin failures++; $display("FAIL no overlapping images"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
