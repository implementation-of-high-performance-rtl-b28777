// neuron_unit: weighted input sums of a fully-connected layer, computed by P
// parallel pipelines of chained DSPs.
//
// Input i is weighted by DSP floor(i/P) of pipeline i mod P; a pipeline thus
// has S = ceil(N_I/P) DSPs, or one less for the last P - (N_I mod P)
// pipelines, whose result is delayed by one register to stay aligned. Every
// DSP adds its product to the partial sum handed on by its predecessor, so
// one neuron's sum walks down the pipeline one DSP per cycle while the next
// neuron follows one cycle behind. A final adder tree sums the P pipeline
// results.
// Timing (driven by the layer): the weights of stage s for the neuron in slot
// m, and the stored inputs of stage s, are presented in cycle s+1+m; the sum
// of that neuron appears on o_sum in cycle S+m+3+ceil(log2 P).
module neuron_unit
  import nn_pkg::*;
#(
  parameter int N_I = 9,
  parameter int P   = 1,
  localparam int S  = (N_I + P - 1) / P
) (
  input  logic clk,
  input  val_t i_in [N_I],      // inputs from the layer's input memory
  input  wgt_t i_w  [S][P],     // current weight of every DSP
  output acc_t o_sum
);
  acc_t chain [S][P];
  acc_t pipe_out [P];

  for (genvar p = 0; p < P; p++) begin : g_pipe
    localparam int SP = (N_I - p + P - 1) / P;   // DSPs in this pipeline
    for (genvar s = 0; s < SP; s++) begin : g_dsp
      dsp_mac u_dsp (
        .clk    (clk),
        .i_val  (i_in[s*P + p]),
        .i_wgt  (i_w[s][p]),
        .i_pcin ((s == 0) ? acc_t'(0) : chain[s-1][p]),
        .o_p    (chain[s][p])
      );
    end
    if (SP < S) begin : g_align
      // shift register that cycle-matches the shorter pipeline
      acc_t d_q;
      always_ff @(posedge clk) d_q <= chain[SP-1][p];
      assign pipe_out[p] = d_q;
      assign chain[S-1][p] = '0;   // unused position
    end else begin : g_full
      assign pipe_out[p] = chain[S-1][p];
    end
  end

  adder_tree #(.N(P), .IN_REG(1'b0), .LVL_REG(1'b1), .OUT_REG(1'b0)) u_sum (
    .clk   (clk),
    .i_d   (pipe_out),
    .o_sum (o_sum)
  );
endmodule
