// conv2d_layer: 2D multi-channel convolution, stride 1, padding 'valid',
// N_K kernels of H_K x W_K x D_I, C processing cycles per data set.
//
// Work is split into output rows (one output slice and channel, full width).
// N_RU = ceil(H_O*D_O / C) row units run in parallel; in cycle k row unit r
// computes channel k mod D_O of output slice r + N_RU*(k / D_O). Row units
// that cover one slice more than others are 'long', the others 'short'.
// This data path (below) serves the regular case, where every output slice
// is completed by a single row unit (ceil(H_O/N_RU) <= floor(C/D_O)). In the
// irregular case the layer instantiates conv2d_irregular instead, which
// shares the remainder cycles out as in nn_pkg::conv_alloc, with the same
// ports and output format; its output row n is written in cycle
// conv_latency + conv_alloc_k(n).
//
// Data path: buffer memory (one write enable per input row h*D_I+d) ->
// 'long' and 'short' working memories holding the input slices of the
// current range of output slices -> row units (row unit r reads working
// slots r .. r+H_K-1) -> activation -> result multicast. Long and short row
// units have one weight memory per group.
//
// Timing, relative to the cycle with i_start high (cycle 0):
//  * input row (h, d) is read from the buffer memory in cycle
//    nn_pkg::conv_need_first(...) at the earliest and conv_need_last(...)
//    at the latest, so it must be written before the first and not be
//    overwritten before the last;
//  * output row (o, c) (index o*D_O + c) is on o_out with o_out_we high in
//    cycle conv_latency(D_I, H_K, W_K, FF_IMPL) + conv_k(o, c, N_RU, D_O)
//    (regular case; conv_k equals conv_alloc_k there).
module conv2d_layer
  import nn_pkg::*;
#(
  parameter int H_I     = 7,
  parameter int W_I     = 7,
  parameter int D_I     = 1,
  parameter int H_K     = 2,
  parameter int W_K     = 2,
  parameter int N_K     = 1,
  parameter int C       = 16,
  parameter bit RELU    = 1'b1,
  parameter bit FF_IMPL = 1'b1,
  localparam int H_O    = H_I - H_K + 1,
  localparam int W_O    = W_I - W_K + 1,
  localparam int D_O    = N_K,
  localparam int KW     = (D_O > 1) ? $clog2(D_O) : 1,
  localparam int DW     = (D_I > 1) ? $clog2(D_I) : 1,
  localparam int PW     = (H_K*W_K > 1) ? $clog2(H_K*W_K) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          i_start,
  input  logic          i_in_we  [H_I*D_I],
  input  val_t          i_in     [H_I*D_I][W_I],
  input  logic          i_w_we,
  input  logic [KW-1:0] i_w_k,
  input  logic [DW-1:0] i_w_d,
  input  logic [PW-1:0] i_w_pos,
  input  wgt_t          i_w_data,
  output val_t          o_out    [H_O*D_O][W_O],
  output logic          o_out_we [H_O*D_O]
);
  localparam int N_RU    = conv_n_ru(H_O, D_O, C);
  localparam int R_LONG  = cdiv(H_O, N_RU);
  localparam int N_LONG  = H_O - (R_LONG - 1) * N_RU;
  localparam int N_SHORT = N_RU - N_LONG;
  localparam int L_SLOTS = N_LONG + H_K - 1;
  localparam int S_SLOTS = (N_SHORT > 0) ? N_SHORT : 1;
  localparam int LAT     = conv_latency(D_I, H_K, W_K, int'(FF_IMPL));
  localparam int BW      = $clog2(H_I + 1);
  localparam int CW      = $clog2(C + 1);
  localparam int NK      = H_K * W_K;

  if (!conv_regular(H_O, D_O, C)) begin : g_irregular
    conv2d_irregular #(.H_I(H_I), .W_I(W_I), .D_I(D_I), .H_K(H_K), .W_K(W_K), .N_K(N_K), .C(C),
                       .RELU(RELU), .FF_IMPL(FF_IMPL)) u_irr (
      .clk (clk), .rst (rst), .i_start (i_start), .i_in_we (i_in_we), .i_in (i_in),
      .i_w_we (i_w_we), .i_w_k (i_w_k), .i_w_d (i_w_d), .i_w_pos (i_w_pos), .i_w_data (i_w_data),
      .o_out (o_out), .o_out_we (o_out_we)
    );
  end else begin : g_regular
  // ---------------------------------------------------------- buffer memory
  val_t buf_rows [H_I*D_I][W_I];
  input_buffer_memory #(.N_ROWS(H_I*D_I), .ROW_W(W_I)) u_buf (
    .clk (clk), .i_we (i_in_we), .i_data (i_in), .o_data (buf_rows)
  );

  // ---------------------------------------------------------- controller
  logic          load_long [D_I], load_short [D_I];
  logic [BW-1:0] base [D_I];
  logic [KW-1:0] waddr [D_I];
  logic          res_valid;
  logic [CW-1:0] res_idx;

  conv_controller #(.C(C), .D_I(D_I), .D_O(D_O), .N_RU(N_RU), .R_LONG(R_LONG), .LAT(LAT),
                    .H_I(H_I)) u_ctrl (
    .clk (clk), .rst (rst), .i_start (i_start),
    .o_load_long (load_long), .o_load_short (load_short), .o_base (base), .o_waddr (waddr),
    .o_valid (res_valid), .o_idx (res_idx)
  );

  // ---------------------------------------------------------- working memories
  val_t long_slot [L_SLOTS][D_I][W_I];
  val_t short_slot [S_SLOTS][D_I][W_I];

  conv_working_memory #(.H_I(H_I), .W_I(W_I), .D_I(D_I), .NSLOTS(L_SLOTS), .SLOT_OFF(0)) u_wm_long (
    .clk (clk), .i_buf (buf_rows), .i_load (load_long), .i_base (base), .o_slot (long_slot)
  );

  if (N_SHORT > 0) begin : g_short_mem
    conv_working_memory #(.H_I(H_I), .W_I(W_I), .D_I(D_I), .NSLOTS(S_SLOTS), .SLOT_OFF(L_SLOTS))
      u_wm_short (
      .clk (clk), .i_buf (buf_rows), .i_load (load_short), .i_base (base), .o_slot (short_slot)
    );
  end else begin : g_no_short
    assign short_slot = '{default: '0};
  end

  // ---------------------------------------------------------- weight memories
  wgt_t w_long [D_I][NK];
  wgt_t w_short [D_I][NK];

  conv_weight_memory #(.D_I(D_I), .D_O(D_O), .H_K(H_K), .W_K(W_K)) u_wmem_long (
    .clk (clk), .i_we (i_w_we), .i_wk (i_w_k), .i_wd (i_w_d), .i_wpos (i_w_pos),
    .i_wdata (i_w_data), .i_raddr (waddr), .o_w (w_long)
  );
  if (N_SHORT > 0) begin : g_short_w
    conv_weight_memory #(.D_I(D_I), .D_O(D_O), .H_K(H_K), .W_K(W_K)) u_wmem_short (
      .clk (clk), .i_we (i_w_we), .i_wk (i_w_k), .i_wd (i_w_d), .i_wpos (i_w_pos),
      .i_wdata (i_w_data), .i_raddr (waddr), .o_w (w_short)
    );
  end else begin : g_no_short_w
    assign w_short = '{default: '0};
  end

  // ---------------------------------------------------------- row units
  val_t ru_res [N_RU][W_O];

  for (genvar r = 0; r < N_RU; r++) begin : g_ru
    val_t slices [H_K][D_I][W_I];
    wgt_t w [D_I][NK];
    acc_t sums [W_O];
    if (r < N_LONG) begin : g_wl
      assign w = w_long;
    end else begin : g_ws
      assign w = w_short;
    end
    for (genvar kh = 0; kh < H_K; kh++) begin : g_sel
      if (r + kh < L_SLOTS) begin : g_l
        assign slices[kh] = long_slot[r + kh];
      end else begin : g_s
        assign slices[kh] = short_slot[r + kh - L_SLOTS];
      end
    end

    conv_row_unit #(.W_I(W_I), .D_I(D_I), .H_K(H_K), .W_K(W_K)) u_ru (
      .clk (clk), .i_slices (slices), .i_w (w), .o_sum (sums)
    );

    for (genvar x = 0; x < W_O; x++) begin : g_act
      act_unit #(.RELU(RELU), .FF_IMPL(FF_IMPL)) u_act (
        .clk (clk), .i_acc (sums[x]), .o_val (ru_res[r][x])
      );
    end
  end

  // ---------------------------------------------------------- multicast
  result_multicast #(.N_SRC(N_RU), .N_DST(H_O*D_O), .ROW_W(W_O), .GROUP(D_O), .IW(CW)) u_mc (
    .i_data (ru_res), .i_valid (res_valid), .i_idx (res_idx),
    .o_data (o_out), .o_we (o_out_we)
  );
  end
endmodule
