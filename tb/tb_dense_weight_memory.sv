// tb_dense_weight_memory: writes all C x P weights, then reads random
// addresses; the word must appear one cycle after its address.
module tb_dense_weight_memory;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int C = 12, P = 3;
  logic we;
  logic [3:0] waddr, raddr;
  logic [1:0] wsel;
  wgt_t wdata;
  wgt_t w [P];
  int ref_m [C][P];
  dense_weight_memory #(.C(C), .P(P)) dut (.clk(clk), .i_we(we), .i_waddr(waddr), .i_wsel(wsel),
    .i_wdata(wdata), .i_raddr(raddr), .o_w(w));

  initial begin
    we = 0; raddr = 0;
    for (int a = 0; a < C; a++) for (int p = 0; p < P; p++) begin
      ref_m[a][p] = rnd_wgt(511);
      we = 1; waddr = 4'(a); wsel = 2'(p); wdata = wgt_t'(ref_m[a][p]);
      @(posedge clk); #0.5;
    end
    we = 0;
    for (int t = 0; t < 100; t++) begin
      int a; a = $urandom_range(C - 1);
      raddr = 4'(a);
      @(posedge clk); #0.5;
      for (int p = 0; p < P; p++) begin
        checks++;
        if (int'(w[p]) != ref_m[a][p]) begin failures++; $display("FAIL a=%0d p=%0d", a, p); end
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
