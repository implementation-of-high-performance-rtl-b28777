// dense_weight_memory: weight memory of one pipeline stage of one neuron unit
// in a fully-connected layer.
//
// It spans the P DSPs of that stage: word m holds the P weights w[n][s*P+p]
// (p = 0..P-1) of the neuron n that the unit computes in slot m. Depth is C,
// the number of processing cycles per data set. The read is registered like
// a block RAM: the word addressed in cycle t is on o_w in cycle t+1. Weights
// are loaded at run time through the write port, one weight per cycle.
module dense_weight_memory
  import nn_pkg::*;
#(
  parameter int C = 16,
  parameter int P = 1,
  localparam int AW = (C > 1) ? $clog2(C) : 1,
  localparam int PW = (P > 1) ? $clog2(P) : 1
) (
  input  logic          clk,
  input  logic          i_we,
  input  logic [AW-1:0] i_waddr,
  input  logic [PW-1:0] i_wsel,   // which DSP of the stage
  input  wgt_t          i_wdata,
  input  logic [AW-1:0] i_raddr,
  output wgt_t          o_w [P]
);
  wgt_t mem [C][P];

  always_ff @(posedge clk) begin
    if (i_we) mem[i_waddr][i_wsel] <= i_wdata;
    o_w <= mem[i_raddr];
  end
endmodule
