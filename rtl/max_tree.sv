// max_tree: maximum of N signed 6.8 values in a binary tree.
//
// Same structure as adder_tree, with the MAX operation on each pair instead
// of an addition. Unused leaves (when N is not a power of two) are filled
// with the most negative value so they never win. Latency:
// IN_REG + LVL_REG*ceil(log2 N) + OUT_REG cycles.
module max_tree
  import nn_pkg::*;
#(
  parameter int N       = 4,
  parameter bit IN_REG  = 1'b0,
  parameter bit LVL_REG = 1'b1,
  parameter bit OUT_REG = 1'b0
) (
  input  logic clk,
  input  val_t i_d [N],
  output val_t o_max
);
  localparam int L = clog2c(N);
  localparam int NP = 1 << L;

  val_t lvl [L+1][NP];

  for (genvar e = 0; e < NP; e++) begin : g_in
    if (e < N) begin : g_v
      if (IN_REG) begin : g_r
        always_ff @(posedge clk) lvl[0][e] <= i_d[e];
      end else begin : g_c
        assign lvl[0][e] = i_d[e];
      end
    end else begin : g_z
      assign lvl[0][e] = VAL_MIN;
    end
  end

  for (genvar l = 1; l <= L; l++) begin : g_lvl
    for (genvar e = 0; e < NP; e++) begin : g_e
      if (e < (NP >> l)) begin : g_max
        val_t m;
        assign m = (lvl[l-1][2*e] > lvl[l-1][2*e+1]) ? lvl[l-1][2*e] : lvl[l-1][2*e+1];
        if (LVL_REG) begin : g_r
          always_ff @(posedge clk) lvl[l][e] <= m;
        end else begin : g_c
          assign lvl[l][e] = m;
        end
      end else begin : g_z
        assign lvl[l][e] = VAL_MIN;
      end
    end
  end

  if (OUT_REG) begin : g_out
    always_ff @(posedge clk) o_max <= lvl[L][0];
  end else begin : g_outc
    assign o_max = lvl[L][0];
  end
endmodule
