// dense_layer: fully-connected layer o = A(W*i) for N_I inputs and N_N
// neurons, with C processing cycles per data set.
//
// Structure: an input memory with one write enable per input; N_NU =
// ceil(N_N/C) neuron units, each with P pipelines of S = ceil(N_I/P) DSPs and
// one weight memory per pipeline stage; an activation unit per neuron unit; a
// controller; and the result multicast. Neuron n is computed by neuron unit
// n mod N_NU in slot n / N_NU, so in every result cycle the N_NU units deliver
// N_NU consecutive neurons. A following fully-connected layer with P equal to
// this layer's N_NU can then take each result the cycle it appears.
//
// Timing, relative to the cycle in which i_start is high (cycle 0):
//  * the P inputs of stage s (inputs s*P .. s*P+P-1) must be written in
//    cycle s, and must not be rewritten before cycle C+s (the next data set);
//  * the results of slot m (neurons m*N_NU + u) are on o_out with o_out_we
//    high in cycle dense_latency(N_I, P, FF_IMPL) + m.
// A new data set may start every C cycles. There is no bias term.
// Weights are written one at a time: weight W[n][i] with i_w_neuron = n and
// i_w_input = i.
module dense_layer
  import nn_pkg::*;
#(
  parameter int N_I     = 9,
  parameter int N_N     = 10,
  parameter int C       = 16,
  parameter int P       = 1,
  parameter bit RELU    = 1'b1,
  parameter bit FF_IMPL = 1'b1,
  localparam int NW     = $clog2(N_N + 1),
  localparam int IWW    = $clog2(N_I + 1)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           i_start,
  input  logic           i_in_we [N_I],
  input  val_t           i_in    [N_I],
  input  logic           i_w_we,
  input  logic [NW-1:0]  i_w_neuron,
  input  logic [IWW-1:0] i_w_input,
  input  wgt_t           i_w_data,
  output val_t           o_out    [N_N],
  output logic           o_out_we [N_N]
);
  localparam int N_NU    = cdiv(N_N, C);
  localparam int N_SLOTS = cdiv(N_N, N_NU);
  localparam int S       = cdiv(N_I, P);
  localparam int LAT     = dense_latency(N_I, P, int'(FF_IMPL));
  localparam int AW      = (C > 1) ? $clog2(C) : 1;
  localparam int PW      = (P > 1) ? $clog2(P) : 1;

  // ---------------------------------------------------------- input memory
  val_t in_rows [N_I][1];
  val_t mem_rows [N_I][1];
  val_t mem_val [N_I];
  for (genvar i = 0; i < N_I; i++) begin : g_in
    assign in_rows[i][0] = i_in[i];
    assign mem_val[i]    = mem_rows[i][0];
  end

  input_buffer_memory #(.N_ROWS(N_I), .ROW_W(1)) u_inmem (
    .clk (clk), .i_we (i_in_we), .i_data (in_rows), .o_data (mem_rows)
  );

  // ---------------------------------------------------------- controller
  logic [AW-1:0] waddr [S];
  logic          res_valid;
  logic [AW-1:0] res_idx;

  dense_controller #(.C(C), .S(S), .N_SLOTS(N_SLOTS), .LAT(LAT)) u_ctrl (
    .clk (clk), .rst (rst), .i_start (i_start),
    .o_waddr (waddr), .o_valid (res_valid), .o_idx (res_idx)
  );

  // weight write address decode: neuron n -> unit n mod N_NU, slot n / N_NU;
  // input i -> stage i / P, DSP i mod P
  logic [AW-1:0] w_slot;
  logic [PW-1:0] w_sel;
  assign w_slot = AW'(int'(i_w_neuron) / N_NU);
  assign w_sel  = PW'(int'(i_w_input) % P);

  // ---------------------------------------------------------- neuron units
  val_t nu_res [N_NU][1];

  for (genvar u = 0; u < N_NU; u++) begin : g_nu
    wgt_t w [S][P];
    acc_t sum;
    for (genvar s = 0; s < S; s++) begin : g_wm
      logic we;
      assign we = i_w_we && (int'(i_w_neuron) % N_NU == u) && (int'(i_w_input) / P == s);
      dense_weight_memory #(.C(C), .P(P)) u_wmem (
        .clk (clk), .i_we (we), .i_waddr (w_slot), .i_wsel (w_sel), .i_wdata (i_w_data),
        .i_raddr (waddr[s]), .o_w (w[s])
      );
    end

    neuron_unit #(.N_I(N_I), .P(P)) u_nu (
      .clk (clk), .i_in (mem_val), .i_w (w), .o_sum (sum)
    );

    act_unit #(.RELU(RELU), .FF_IMPL(FF_IMPL)) u_act (
      .clk (clk), .i_acc (sum), .o_val (nu_res[u][0])
    );
  end

  // ---------------------------------------------------------- multicast
  val_t out_rows [N_N][1];
  result_multicast #(.N_SRC(N_NU), .N_DST(N_N), .ROW_W(1), .GROUP(1), .IW(AW)) u_mc (
    .i_data (nu_res), .i_valid (res_valid), .i_idx (res_idx),
    .o_data (out_rows), .o_we (o_out_we)
  );
  for (genvar n = 0; n < N_N; n++) begin : g_out
    assign o_out[n] = out_rows[n][0];
  end
endmodule
