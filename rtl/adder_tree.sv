// adder_tree: sum of N signed ACC_W-bit values in a binary tree.
//
// Level l adds pairs of the results of level l-1, so the depth is
// ceil(log2 N). An odd element is carried to the next level unchanged.
// Register stages can be switched on at the input (IN_REG), after every
// level (LVL_REG) and at the output (OUT_REG); the latency in cycles is
// IN_REG + LVL_REG*ceil(log2 N) + OUT_REG. With N = 1 the tree is a plain
// (optionally registered) wire. No reset: all registers are pure pipeline
// registers.
module adder_tree
  import nn_pkg::*;
#(
  parameter int N       = 4,
  parameter bit IN_REG  = 1'b0,
  parameter bit LVL_REG = 1'b1,
  parameter bit OUT_REG = 1'b0
) (
  input  logic clk,
  input  acc_t i_d [N],
  output acc_t o_sum
);
  localparam int L = clog2c(N);
  localparam int NP = 1 << L;

  acc_t lvl [L+1][NP];

  // level 0: optional input register, padded with zeros
  for (genvar e = 0; e < NP; e++) begin : g_in
    if (e < N) begin : g_v
      if (IN_REG) begin : g_r
        always_ff @(posedge clk) lvl[0][e] <= i_d[e];
      end else begin : g_c
        assign lvl[0][e] = i_d[e];
      end
    end else begin : g_z
      assign lvl[0][e] = '0;
    end
  end

  for (genvar l = 1; l <= L; l++) begin : g_lvl
    for (genvar e = 0; e < NP; e++) begin : g_e
      if (e < (NP >> l)) begin : g_add
        if (LVL_REG) begin : g_r
          always_ff @(posedge clk) lvl[l][e] <= lvl[l-1][2*e] + lvl[l-1][2*e+1];
        end else begin : g_c
          assign lvl[l][e] = lvl[l-1][2*e] + lvl[l-1][2*e+1];
        end
      end else begin : g_z
        assign lvl[l][e] = '0;
      end
    end
  end

  if (OUT_REG) begin : g_out
    always_ff @(posedge clk) o_sum <= lvl[L][0];
  end else begin : g_outc
    assign o_sum = lvl[L][0];
  end
endmodule
