// conv2d_irregular: data path of the 2D convolution for the irregular
// allocation case, where the row units cannot finish every output slice on
// their own and the remainder cycles (C mod D_O per unit) are shared out as
// single-slice, bi-slice and multi-slice work (nn_pkg::conv_alloc). It is
// instantiated by conv2d_layer when the regular condition fails, and has the
// same ports, weight write port and output format.
//
// How: a start-triggered cycle counter k indexes a constant table per row
// unit (output slice, channel, valid), computed at elaboration from
// conv_alloc. Each row unit has its own working memory: for every row it
// computes, the H_K input slices of all channels are read from the buffer
// memory in the row's cycle k, and channel d is passed through d delay
// registers so it meets DSP stage d in cycle k+d+1. Each row unit also has
// its own weight memory, addressed per stage with the output channel delayed
// by d. Outputs are multicast using the same table.
//
// The allocation follows the original design; the memories do not. There,
// single-slice and free units keep the shared 'long'/'short' memories,
// bi-slice units are multiplexed onto the single-slice inputs, and
// multi-slice units get an extra memory with a one-slice offset
// multiplexer. Loading a private working memory per row unit and row gives
// the same results with simpler control, at the cost of more buffer reads
// and registers, and of one weight memory per unit instead of per group.
//
// Timing, relative to i_start (cycle 0): input row (h, d) is read in the
// cycles nn_pkg::conv_irr_need(...) give; output row n is written in cycle
// conv_latency(D_I, H_K, W_K, FF_IMPL) + conv_alloc_k(n).
module conv2d_irregular
  import nn_pkg::*;
#(
  parameter int H_I     = 14,
  parameter int W_I     = 14,
  parameter int D_I     = 1,
  parameter int H_K     = 2,
  parameter int W_K     = 2,
  parameter int N_K     = 2,
  parameter int C       = 13,
  parameter bit RELU    = 1'b1,
  parameter bit FF_IMPL = 1'b1,
  localparam int H_O = H_I - H_K + 1,
  localparam int W_O = W_I - W_K + 1,
  localparam int D_O = N_K,
  localparam int KW  = (D_O > 1) ? $clog2(D_O) : 1,
  localparam int DW  = (D_I > 1) ? $clog2(D_I) : 1,
  localparam int PW  = (H_K*W_K > 1) ? $clog2(H_K*W_K) : 1
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
  localparam int N_RU = conv_n_ru(H_O, D_O, C);
  localparam int LAT  = conv_latency(D_I, H_K, W_K, int'(FF_IMPL));
  localparam int CW   = $clog2(C + 1);
  localparam int SW   = $clog2(H_O + 1);
  localparam int NK   = H_K * W_K;

  initial begin
    assert (conv_alloc_ok(H_O, D_O, C))
      else $fatal(1, "conv2d_irregular: no complete allocation for H_O=%0d D_O=%0d C=%0d", H_O, D_O, C);
  end

  // ---------------------------------------------------------- buffer memory
  val_t buf_rows [H_I*D_I][W_I];
  input_buffer_memory #(.N_ROWS(H_I*D_I), .ROW_W(W_I)) u_buf (
    .clk (clk), .i_we (i_in_we), .i_data (i_in), .o_data (buf_rows)
  );

  // ---------------------------------------------------------- cycle counter
  logic [CW-1:0] k, k_q;
  logic          active;
  assign k      = i_start ? '0 : k_q;
  assign active = (k < CW'(C));
  always_ff @(posedge clk) begin
    if (rst)         k_q <= CW'(C);
    else if (active) k_q <= k + 1'b1;
  end

  // result window: cycle index of the rows leaving the activation units
  logic [LAT-1:0] st_q;
  logic [CW-1:0]  oc_q;
  logic           res_valid;
  always_ff @(posedge clk) begin
    if (rst) st_q <= '0;
    else     st_q <= {st_q[LAT-2:0], i_start};
  end
  always_ff @(posedge clk) begin
    if (rst)                  oc_q <= CW'(C);
    else if (st_q[LAT-2])     oc_q <= '0;
    else if (oc_q < CW'(C))   oc_q <= oc_q + 1'b1;
  end
  assign res_valid = (oc_q < CW'(C));

  // ---------------------------------------------------------- row units
  val_t ru_res [N_RU][W_O];

  for (genvar r = 0; r < N_RU; r++) begin : g_ru
    // allocation table of this unit
    logic          tab_v  [C];
    logic [SW-1:0] tab_sl [C];
    logic [KW-1:0] tab_ch [C];
    for (genvar kk = 0; kk < C; kk++) begin : g_tab
      localparam int N = conv_alloc(H_O, D_O, C, r, kk);
      assign tab_v[kk]  = (N >= 0);
      assign tab_sl[kk] = SW'((N >= 0) ? N / D_O : 0);
      assign tab_ch[kk] = KW'((N >= 0) ? N % D_O : 0);
    end

    // stage-d view of the table entry (d cycles late)
    logic          v_d  [D_I];
    logic [SW-1:0] sl_d [D_I];
    logic [KW-1:0] ch_d [D_I];
    assign v_d[0]  = active && tab_v[k];
    assign sl_d[0] = tab_sl[k];
    assign ch_d[0] = tab_ch[k];
    for (genvar d = 1; d < D_I; d++) begin : g_dly
      always_ff @(posedge clk) begin
        if (rst) v_d[d] <= 1'b0;
        else     v_d[d] <= v_d[d-1];
        sl_d[d] <= sl_d[d-1];
        ch_d[d] <= ch_d[d-1];
      end
    end

    // private working memory: all channels of the H_K slices are read from
    // the buffer in the row's own cycle k; channel d is then delayed by d
    // cycles to meet DSP stage d, so no buffer read falls outside cycles
    // 0 .. C-1 of the data set
    val_t slices [H_K][D_I][W_I];
    for (genvar d = 0; d < D_I; d++) begin : g_wm
      val_t dl [d+1][H_K][W_I];
      for (genvar kh = 0; kh < H_K; kh++) begin : g_kh
        always_ff @(posedge clk) begin
          if (rst)         dl[0][kh] <= '{default: '0};
          else if (v_d[0]) dl[0][kh] <= buf_rows[(int'(sl_d[0]) + kh) * D_I + d];
        end
      end
      for (genvar e = 1; e <= d; e++) begin : g_sh
        always_ff @(posedge clk) dl[e] <= dl[e-1];
      end
      for (genvar kh = 0; kh < H_K; kh++) begin : g_out
        assign slices[kh][d] = dl[d][kh];
      end
    end

    // private weight memory, addressed per stage with the output channel
    wgt_t w [D_I][NK];
    conv_weight_memory #(.D_I(D_I), .D_O(D_O), .H_K(H_K), .W_K(W_K)) u_wmem (
      .clk (clk), .i_we (i_w_we), .i_wk (i_w_k), .i_wd (i_w_d), .i_wpos (i_w_pos),
      .i_wdata (i_w_data), .i_raddr (ch_d), .o_w (w)
    );

    acc_t sums [W_O];
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
  for (genvar n = 0; n < H_O*D_O; n++) begin : g_mc
    localparam int SR = conv_alloc_ru(H_O, D_O, C, n);
    localparam int SK = conv_alloc_k(H_O, D_O, C, n);
    assign o_out[n]    = ru_res[SR];
    assign o_out_we[n] = res_valid && (oc_q == CW'(SK));
  end
endmodule
