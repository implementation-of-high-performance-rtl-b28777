// tb_conv_working_memory: a buffer of 9 slices x 2 channels; loads channel 0
// and channel 1 with different bases at different cycles and checks each
// slot/channel against the buffer contents (zero beyond the last slice) and
// that an unloaded channel keeps its contents.
module tb_conv_working_memory;
  import nn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 1'b0;
  always #1 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int HI = 9, WI = 4, DI = 2, NS = 4, OFF = 1;
  val_t bufm [HI*DI][WI];
  logic load [DI];
  logic [3:0] base [DI];
  val_t slot [NS][DI][WI];
  conv_working_memory #(.H_I(HI), .W_I(WI), .D_I(DI), .NSLOTS(NS), .SLOT_OFF(OFF)) dut (
    .clk(clk), .i_buf(bufm), .i_load(load), .i_base(base), .o_slot(slot));

  int bv [HI*DI][WI];
  task automatic chk_ch(input int d, input int b);
    for (int q = 0; q < NS; q++) for (int x = 0; x < WI; x++) begin
      int h, e;
      h = b + OFF + q;
      e = (h < HI) ? bv[h*DI+d][x] : 0;
      checks++;
      if (int'(slot[q][d][x]) != e) begin failures++; $display("FAIL d=%0d b=%0d q=%0d", d, b, q); end
    end
  endtask

  initial begin
    for (int r = 0; r < HI*DI; r++) for (int x = 0; x < WI; x++) begin bv[r][x] = rnd_val(8000); bufm[r][x] = val_t'(bv[r][x]); end
    for (int b = 0; b < 7; b++) begin
      load[0] = 1; load[1] = 0; base[0] = 4'(b); base[1] = 4'(b + 1);
      @(posedge clk); #0.1;
      load[0] = 0; load[1] = 1;
      @(posedge clk); #0.1;
      load[1] = 0;
      chk_ch(0, b);
      chk_ch(1, b + 1);
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
