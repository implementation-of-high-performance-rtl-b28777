// input_buffer_memory: the input memory of a layer with external write
// control.
//
// The memory holds N_ROWS rows of ROW_W 6.8 values, every input of the layer
// exactly once. Each row has its own write enable, driven by the preceding
// layer's result write enables (or by the network input), so the order in
// which rows arrive is decided outside. A row written in cycle t is visible on
// o_data from cycle t+1; a row read in the same cycle as it is overwritten
// still shows the old value. It serves as the input memory of the
// fully-connected layer (ROW_W = 1) and as the buffer memory of the
// convolution and pooling layers (a row is one height/channel position
// spanning the full width). The contents are not reset: every value is
// written before it is used.
module input_buffer_memory
  import nn_pkg::*;
#(
  parameter int N_ROWS = 8,
  parameter int ROW_W  = 1
) (
  input  logic clk,
  input  logic i_we   [N_ROWS],
  input  val_t i_data [N_ROWS][ROW_W],
  output val_t o_data [N_ROWS][ROW_W]
);
  val_t mem [N_ROWS][ROW_W];

  always_ff @(posedge clk) begin
    for (int r = 0; r < N_ROWS; r++)
      if (i_we[r]) mem[r] <= i_data[r];
  end

  assign o_data = mem;
endmodule
