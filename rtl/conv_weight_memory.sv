// conv_weight_memory: kernel weights for one group of row units of the 2D
// convolution layer (all row units of a group compute the same output
// channel in every cycle, so they share one weight memory).
//
// For every input channel d (one DSP pipeline stage) it stores, per output
// channel, the H_K*W_K kernel weights of that channel. Stage d is read with
// its own address i_raddr[d] (the output channel that stage is weighting)
// and the read is registered: the address of cycle t gives o_w[d] in cycle
// t+1. The memory is built from registers. Weights are written one at a
// time: kernel k, input channel d, kernel position kh*W_K+kw.
module conv_weight_memory
  import nn_pkg::*;
#(
  parameter int D_I = 1,
  parameter int D_O = 1,
  parameter int H_K = 2,
  parameter int W_K = 2,
  localparam int KW = (D_O > 1) ? $clog2(D_O) : 1,
  localparam int DW = (D_I > 1) ? $clog2(D_I) : 1,
  localparam int PW = (H_K*W_K > 1) ? $clog2(H_K*W_K) : 1
) (
  input  logic          clk,
  input  logic          i_we,
  input  logic [KW-1:0] i_wk,
  input  logic [DW-1:0] i_wd,
  input  logic [PW-1:0] i_wpos,
  input  wgt_t          i_wdata,
  input  logic [KW-1:0] i_raddr [D_I],
  output wgt_t          o_w     [D_I][H_K*W_K]
);
  wgt_t mem [D_I][D_O][H_K*W_K];

  always_ff @(posedge clk) begin
    if (i_we) mem[i_wd][i_wk][i_wpos] <= i_wdata;
    for (int d = 0; d < D_I; d++) o_w[d] <= mem[d][i_raddr[d]];
  end
endmodule
