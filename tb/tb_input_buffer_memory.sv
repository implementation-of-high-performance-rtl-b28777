// tb_input_buffer_memory: random row writes with random write enables; every
// cycle all rows are compared with a reference copy (write visible one cycle
// later, rows without write enable keep their contents).
module tb_input_buffer_memory;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NR = 6, RW = 3;
  logic we [NR];
  val_t d [NR][RW], q [NR][RW];
  int ref_m [NR][RW];
  input_buffer_memory #(.N_ROWS(NR), .ROW_W(RW)) dut (.clk(clk), .i_we(we), .i_data(d), .o_data(q));

  initial begin
    // fill every row once
    for (int r = 0; r < NR; r++) begin
      we[r] = 1'b1;
      for (int c = 0; c < RW; c++) begin ref_m[r][c] = rnd_val(8191); d[r][c] = val_t'(ref_m[r][c]); end
    end
    @(posedge clk); #0.5;
    for (int t = 0; t < 200; t++) begin
      for (int r = 0; r < NR; r++) for (int c = 0; c < RW; c++) begin
        checks++;
        if (int'(q[r][c]) != ref_m[r][c]) begin failures++; $display("FAIL t=%0d r=%0d", t, r); end
      end
      for (int r = 0; r < NR; r++) begin
        we[r] = ($urandom_range(2) == 0);
        for (int c = 0; c < RW; c++) begin
          int v; v = rnd_val(8191); d[r][c] = val_t'(v);
          if (we[r]) ref_m[r][c] = v;
        end
      end
      @(posedge clk); #0.5;
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
