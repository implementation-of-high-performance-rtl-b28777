// pool_working_memory: working memory of one pooling row unit.
//
// When i_load is high it copies, at the end of the cycle, the H_P input rows
// of channel i_ch that belong to output slice i_slice from the layer's
// buffer memory (input slices i_slice*H_P - PAD_LO_H + t, t = 0..H_P-1).
// Columns are arranged as W_O windows of W_P values (input column
// x - PAD_LO_W for window column x). Positions outside the input (padding
// 'same' or 'unchanged') hold the most negative value, so they never win the
// maximum; input rows/columns beyond the last complete window (padding
// 'valid') are never read.
module pool_working_memory
  import nn_pkg::*;
#(
  parameter int H_I      = 6,
  parameter int W_I      = 6,
  parameter int D        = 1,
  parameter int H_P      = 2,
  parameter int W_P      = 2,
  parameter int W_O      = 3,
  parameter int PAD_LO_H = 0,
  parameter int PAD_LO_W = 0,
  parameter int SW       = 3,    // width of i_slice
  parameter int CHW      = 1     // width of i_ch
) (
  input  logic           clk,
  input  val_t           i_buf   [H_I*D][W_I],
  input  logic           i_load,
  input  logic [SW-1:0]  i_slice,
  input  logic [CHW-1:0] i_ch,
  output val_t           o_win   [H_P][W_O*W_P]
);
  val_t mem [H_P][W_O*W_P];

  for (genvar t = 0; t < H_P; t++) begin : g_row
    int h;
    assign h = int'(i_slice) * H_P - PAD_LO_H + t;
    for (genvar x = 0; x < W_O*W_P; x++) begin : g_col
      localparam int W = x - PAD_LO_W;
      always_ff @(posedge clk) begin
        if (i_load) begin
          if (W >= 0 && W < W_I && h >= 0 && h < H_I) mem[t][x] <= i_buf[h*D + int'(i_ch)][W];
          else                                          mem[t][x] <= VAL_MIN;
        end
      end
    end
  end

  assign o_win = mem;
endmodule
