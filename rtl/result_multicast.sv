// result_multicast: connects unit results to the layer outputs.
//
// Each processing unit (neuron unit or row unit) computes a different output
// in every cycle. Its result signal is wired to every output position it
// produces at some cycle, and the position's write enable is decoded from the
// common valid flag and the cycle index k. The position of unit s at index k
// is n = ((k / GROUP) * N_SRC + s) * GROUP + k mod GROUP:
//  * GROUP = 1 gives the interleaved order n = k*N_SRC + s used by the
//    fully-connected layer (neuron n) and the pooling layer (row n);
//  * GROUP = D_O gives the convolution order: unit s handles output slices
//    s, s+N_SRC, ... and steps through the D_O channels of a slice in D_O
//    consecutive cycles (row n = slice*D_O + channel).
// Positions n >= N_DST do not exist and are simply not produced.
// Purely combinational: data and write enable appear in the cycle the unit
// result does.
module result_multicast
  import nn_pkg::*;
#(
  parameter int N_SRC = 1,
  parameter int N_DST = 10,
  parameter int ROW_W = 1,
  parameter int GROUP = 1,
  parameter int IW    = 5
) (
  input  val_t          i_data [N_SRC][ROW_W],
  input  logic          i_valid,
  input  logic [IW-1:0] i_idx,
  output val_t          o_data [N_DST][ROW_W],
  output logic          o_we   [N_DST]
);
  for (genvar n = 0; n < N_DST; n++) begin : g_dst
    localparam int CH  = n % GROUP;
    localparam int Q   = n / GROUP;
    localparam int SRC = Q % N_SRC;
    localparam int IDX = (Q / N_SRC) * GROUP + CH;
    assign o_data[n] = i_data[SRC];
    assign o_we[n]   = i_valid && (i_idx == IW'(IDX));
  end
endmodule
