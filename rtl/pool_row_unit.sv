// pool_row_unit: one output row of the max-pooling layer.
//
// W_O max trees, one per output position; tree x takes the H_P x W_P window
// columns x*W_P .. x*W_P+W_P-1 of the working-memory rows. Latency
// ceil(log2(H_P*W_P)) cycles (one register per tree level).
module pool_row_unit
  import nn_pkg::*;
#(
  parameter int H_P = 2,
  parameter int W_P = 2,
  parameter int W_O = 3
) (
  input  logic clk,
  input  val_t i_win [H_P][W_O*W_P],
  output val_t o_max [W_O]
);
  for (genvar x = 0; x < W_O; x++) begin : g_pos
    val_t leaves [H_P*W_P];
    for (genvar t = 0; t < H_P; t++) begin : g_t
      for (genvar u = 0; u < W_P; u++) begin : g_u
        assign leaves[t*W_P + u] = i_win[t][x*W_P + u];
      end
    end
    max_tree #(.N(H_P*W_P), .IN_REG(1'b0), .LVL_REG(1'b1), .OUT_REG(1'b0)) u_max (
      .clk (clk), .i_d (leaves), .o_max (o_max[x])
    );
  end
endmodule
