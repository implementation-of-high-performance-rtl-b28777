// nn_top: a complete trigger network of the layer sequence
// input - convolution - max pooling - flatten - dense - dense
// (relu after every layer but the last, which is linear).
//
// Defaults give the smallest evaluated MNIST network: a 7x7 single-channel
// input, one 2x2 kernel (6x6x1 result), 2x2 pooling (3x3x1), 9 flat inputs,
// 10 hidden neurons and 10 output neurons, with C = 16 processing cycles per
// data set (640 MHz processing clock at a 40 MHz data rate), 334 MACs in
// total. Other networks of the same sequence are obtained by parameters.
//
// Every layer is one pipeline stage that takes a data set within C cycles
// and delivers it within C cycles; a new image may be written every C
// cycles (i_in_valid), and several images are in flight at once. The layer
// start pulses are the input pulse delayed by fixed offsets, computed here at
// elaboration from the layers' schedules (nn_pkg): each layer starts as
// early as it can without ever reading an input row before it has been
// written. Initial assertions check that no layer input is overwritten by
// the following data set before its last use (the original flow resolved
// such cases with per-input extra delays, which are not built here).
//
// Interface: the image is written as rows (row h*IN_D + d, IN_W values) in
// one cycle with i_in_valid. Weights are loaded at run time through three
// write ports (convolution: kernel, input channel, kernel position kh*K_W+kw;
// dense: neuron, input). Output neuron n appears on o_out[n] with o_out_we[n]
// high, LATENCY cycles after i_in_valid for the first slot of neurons.
module nn_top
  import nn_pkg::*;
#(
  parameter int   IN_H    = 7,
  parameter int   IN_W    = 7,
  parameter int   IN_D    = 1,
  parameter int   K_H     = 2,
  parameter int   K_W     = 2,
  parameter int   N_K     = 1,
  parameter int   P_H     = 2,
  parameter int   P_W     = 2,
  parameter pad_e PAD     = PAD_SAME,
  parameter int   N1      = 10,
  parameter int   N2      = 10,
  parameter int   C       = 16,
  parameter int   P1      = 1,
  parameter bit   FF_IMPL = 1'b1,
  // derived shapes
  localparam int  H1   = IN_H - K_H + 1,
  localparam int  W1   = IN_W - K_W + 1,
  localparam int  H2   = pool_out_dim(H1, P_H, PAD),
  localparam int  W2   = pool_out_dim(W1, P_W, PAD),
  localparam int  NF   = H2 * W2 * N_K,
  localparam int  KKW  = (N_K > 1) ? $clog2(N_K) : 1,
  localparam int  KDW  = (IN_D > 1) ? $clog2(IN_D) : 1,
  localparam int  KPW  = (K_H*K_W > 1) ? $clog2(K_H*K_W) : 1,
  localparam int  N1W  = $clog2(N1 + 1),
  localparam int  NFW  = $clog2(NF + 1),
  localparam int  N2W  = $clog2(N2 + 1)
) (
  input  logic           clk,
  input  logic           rst,
  // input image
  input  logic           i_in_valid,
  input  val_t           i_image [IN_H*IN_D][IN_W],
  // convolution weight load
  input  logic           i_cw_we,
  input  logic [KKW-1:0] i_cw_k,
  input  logic [KDW-1:0] i_cw_d,
  input  logic [KPW-1:0] i_cw_pos,
  input  wgt_t           i_cw_data,
  // dense 1 weight load
  input  logic           i_d1_we,
  input  logic [N1W-1:0] i_d1_neuron,
  input  logic [NFW-1:0] i_d1_input,
  input  wgt_t           i_d1_data,
  // dense 2 weight load
  input  logic           i_d2_we,
  input  logic [N2W-1:0] i_d2_neuron,
  input  logic [N1W-1:0] i_d2_input,
  input  wgt_t           i_d2_data,
  // network result
  output val_t           o_out    [N2],
  output logic           o_out_we [N2]
);
  // ------------------------------------------------------------ schedule
  localparam int NRU_C  = conv_n_ru(H1, N_K, C);
  localparam bit REG_C  = conv_regular(H1, N_K, C);
  localparam int RL_C   = cdiv(H1, NRU_C);
  localparam int LAT_C  = conv_latency(IN_D, K_H, K_W, int'(FF_IMPL));
  localparam int NRU_P  = pool_n_ru(H2, N_K, C);
  localparam int LAT_P  = pool_latency(P_H, P_W);
  localparam int PADL_P = pool_pad_lo(H1, P_H, PAD);
  localparam int NNU_1  = cdiv(N1, C);
  localparam int P2     = NNU_1;   // successor parallelism = predecessor's neuron units
  localparam int LAT_1  = dense_latency(NF, P1, int'(FF_IMPL));
  localparam int LAT_2  = dense_latency(N1, P2, int'(FF_IMPL));

  // cycle in which the convolution computes output row (o, c)
  function automatic int conv_row_k(input int o, input int c);
    return REG_C ? conv_k(o, c, NRU_C, N_K) : conv_alloc_k(H1, N_K, C, o * N_K + c);
  endfunction

  // convolution start after the image write: earliest buffer read is cycle 0
  function automatic int f_conv_delay();
    int m;
    m = 0;
    for (int h = 0; h < IN_H; h++)
      for (int d = 0; d < IN_D; d++) begin
        int nf;
        nf = REG_C ? conv_need_first(h, d, NRU_C, K_H, N_K, RL_C)
                   : conv_irr_need(h, H1, N_K, C, K_H, 1'b0);
        if (nf >= 0) m = imax(m, 1 - nf);
      end
    return m;
  endfunction

  // pooling start relative to convolution start
  function automatic int f_pool_delay();
    int m;
    m = 0;
    for (int o = 0; o < H1; o++)
      for (int c = 0; c < N_K; c++) begin
        int po;
        po = (o + PADL_P) / P_H;
        if (po < H2)
          m = imax(m, LAT_C + conv_row_k(o, c) + 1 - (po * N_K + c) / NRU_P);
      end
    return m;
  endfunction

  // regularizer start relative to pooling start
  function automatic int f_flat_delay();
    int m;
    m = 0;
    for (int o = 0; o < H2; o++)
      for (int c = 0; c < N_K; c++)
        m = imax(m, LAT_P + (o * N_K + c) / NRU_P + 1 - (o * W2 * N_K + c) / P1);
    return m;
  endfunction

  localparam int D_CONV = f_conv_delay();
  localparam int D_POOL = f_pool_delay();
  localparam int D_FLAT = f_flat_delay();
  localparam int T_CONV = D_CONV;
  localparam int T_POOL = T_CONV + D_POOL;
  localparam int T_FLAT = T_POOL + D_FLAT;
  localparam int T_D1   = T_FLAT + 1;
  localparam int T_D2   = T_D1 + LAT_1;
  localparam int LATENCY = T_D2 + LAT_2;   // input pulse to first network result

  // overwrite checks: the next data set arrives C cycles later
  function automatic bit f_overwrite_ok();
    bit ok;
    ok = 1'b1;
    for (int h = 0; h < IN_H; h++)
      for (int d = 0; d < IN_D; d++)
        if (D_CONV + (REG_C ? conv_need_last(h, d, NRU_C, K_H, N_K, RL_C)
                            : conv_irr_need(h, H1, N_K, C, K_H, 1'b1)) > C) ok = 1'b0;
    for (int o = 0; o < H1; o++)
      for (int c = 0; c < N_K; c++) begin
        int po;
        po = (o + PADL_P) / P_H;
        if (po < H2 && D_POOL + (po * N_K + c) / NRU_P > C + LAT_C + conv_row_k(o, c))
          ok = 1'b0;
      end
    for (int o = 0; o < H2; o++)
      for (int c = 0; c < N_K; c++)
        if (D_FLAT + (o * W2 * N_K + (W2 - 1) * N_K + c) / P1 > C + LAT_P + (o * N_K + c) / NRU_P)
          ok = 1'b0;
    return ok;
  endfunction

  initial begin
    assert (f_overwrite_ok())
      else $fatal(1, "nn_top: a layer input would be overwritten before its last use");
  end

  // ------------------------------------------------------------ sequencer
  // layer enable pulses: the input pulse delayed to each layer's start
  logic [LATENCY:0] seq_q;
  always_ff @(posedge clk) begin
    if (rst) seq_q <= '0;
    else     seq_q <= {seq_q[LATENCY-1:0], i_in_valid};
  end
  logic st_conv, st_pool, st_flat, st_d1, st_d2;
  assign st_conv = seq_q[T_CONV-1];
  assign st_pool = seq_q[T_POOL-1];
  assign st_flat = seq_q[T_FLAT-1];
  assign st_d1   = seq_q[T_D1-1];
  assign st_d2   = seq_q[T_D2-1];

  // ------------------------------------------------------------ layers
  logic in_we [IN_H*IN_D];
  always_comb for (int r = 0; r < IN_H*IN_D; r++) in_we[r] = i_in_valid;

  val_t c_out [H1*N_K][W1];
  logic c_we  [H1*N_K];
  conv2d_layer #(.H_I(IN_H), .W_I(IN_W), .D_I(IN_D), .H_K(K_H), .W_K(K_W), .N_K(N_K), .C(C),
                 .RELU(1'b1), .FF_IMPL(FF_IMPL)) u_conv (
    .clk (clk), .rst (rst), .i_start (st_conv), .i_in_we (in_we), .i_in (i_image),
    .i_w_we (i_cw_we), .i_w_k (i_cw_k), .i_w_d (i_cw_d), .i_w_pos (i_cw_pos), .i_w_data (i_cw_data),
    .o_out (c_out), .o_out_we (c_we)
  );

  val_t p_out [H2*N_K][W2];
  logic p_we  [H2*N_K];
  maxpool2d_layer #(.H_I(H1), .W_I(W1), .D(N_K), .H_P(P_H), .W_P(P_W), .C(C), .PAD(PAD)) u_pool (
    .clk (clk), .rst (rst), .i_start (st_pool), .i_in_we (c_we), .i_in (c_out),
    .o_out (p_out), .o_out_we (p_we)
  );

  val_t f_out [NF];
  logic f_we  [NF];
  flatten_regularizer #(.H(H2), .W(W2), .D(N_K), .P(P1), .C(C)) u_flat (
    .clk (clk), .rst (rst), .i_start (st_flat), .i_in_we (p_we), .i_in (p_out),
    .o_out (f_out), .o_out_we (f_we)
  );

  val_t d1_out [N1];
  logic d1_we  [N1];
  dense_layer #(.N_I(NF), .N_N(N1), .C(C), .P(P1), .RELU(1'b1), .FF_IMPL(FF_IMPL)) u_d1 (
    .clk (clk), .rst (rst), .i_start (st_d1), .i_in_we (f_we), .i_in (f_out),
    .i_w_we (i_d1_we), .i_w_neuron (i_d1_neuron), .i_w_input (i_d1_input), .i_w_data (i_d1_data),
    .o_out (d1_out), .o_out_we (d1_we)
  );

  dense_layer #(.N_I(N1), .N_N(N2), .C(C), .P(P2), .RELU(1'b0), .FF_IMPL(FF_IMPL)) u_d2 (
    .clk (clk), .rst (rst), .i_start (st_d2), .i_in_we (d1_we), .i_in (d1_out),
    .i_w_we (i_d2_we), .i_w_neuron (i_d2_neuron), .i_w_input (i_d2_input), .i_w_data (i_d2_data),
    .o_out (o_out), .o_out_we (o_out_we)
  );
endmodule
