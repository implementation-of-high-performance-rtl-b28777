// conv_row_unit: computes one output row (fixed output slice and channel,
// full output width) of the 2D convolution per cycle.
//
// There are W_O = W_I - W_K + 1 subunits, one per output position x. A
// subunit has one DSP pipeline per kernel position (kh, kw); the pipeline
// weights input (slice kh, channel d, column x+kw) for d = 0 .. D_I-1, top
// channel first, one channel per DSP and cycle, carrying the partial sum
// along. An adder tree then adds the H_K*W_K pipeline results. All subunits
// share the weights (one weight per stage and kernel position) and read
// overlapping windows of the same input slices.
// Timing: the element the unit starts in cycle k is weighted in DSP stage d
// in cycle k+d+1 (inputs of channel d and weights of stage d must be
// presented then) and its sums leave o_sum in cycle
// k + D_I + 3 + ceil(log2(H_K*W_K)).
module conv_row_unit
  import nn_pkg::*;
#(
  parameter int W_I = 7,
  parameter int D_I = 1,
  parameter int H_K = 2,
  parameter int W_K = 2,
  localparam int W_O = W_I - W_K + 1,
  localparam int NK  = H_K * W_K
) (
  input  logic clk,
  input  val_t i_slices [H_K][D_I][W_I],
  input  wgt_t i_w      [D_I][NK],
  output acc_t o_sum    [W_O]
);
  for (genvar x = 0; x < W_O; x++) begin : g_sub
    acc_t pos_sum [NK];
    for (genvar kh = 0; kh < H_K; kh++) begin : g_kh
      for (genvar kw = 0; kw < W_K; kw++) begin : g_kw
        acc_t chain [D_I];
        for (genvar d = 0; d < D_I; d++) begin : g_d
          dsp_mac u_dsp (
            .clk    (clk),
            .i_val  (i_slices[kh][d][x+kw]),
            .i_wgt  (i_w[d][kh*W_K+kw]),
            .i_pcin ((d == 0) ? acc_t'(0) : chain[d-1]),
            .o_p    (chain[d])
          );
        end
        assign pos_sum[kh*W_K+kw] = chain[D_I-1];
      end
    end
    adder_tree #(.N(NK), .IN_REG(1'b0), .LVL_REG(1'b1), .OUT_REG(1'b0)) u_sum (
      .clk (clk), .i_d (pos_sum), .o_sum (o_sum[x])
    );
  end
endmodule
