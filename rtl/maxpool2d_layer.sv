// maxpool2d_layer: 2D maximum pooling with pooling area H_P x W_P, stride
// equal to the pooling area, per channel, with padding 'valid' (incomplete
// windows at the high edges dropped), 'same' (input extended on both sides,
// the extra element at the high edge) or 'unchanged' (extended at the high
// edges only). Padded positions never win the maximum.
//
// Output rows (slice o, channel c; index o*D + c) are distributed over
// N_RU = ceil(H_O*D / C) row units in interleaved order: row unit r computes
// row k*N_RU + r in cycle k. Each row unit has its own working memory,
// which loads the H_P input rows it needs from the buffer memory in cycle k;
// the row unit's max trees deliver the row POOL_LAT = 1+ceil(log2(H_P*W_P))
// cycles after that. Results are multicast to the output rows with one write
// enable each.
//
// Timing, relative to the cycle with i_start high: input row (h, c) is read
// from the buffer memory in cycle k of the output row it belongs to; output
// row n is written in cycle POOL_LAT + n / N_RU.
module maxpool2d_layer
  import nn_pkg::*;
#(
  parameter int   H_I = 6,
  parameter int   W_I = 6,
  parameter int   D   = 1,
  parameter int   H_P = 2,
  parameter int   W_P = 2,
  parameter int   C   = 16,
  parameter pad_e PAD = PAD_SAME,
  localparam int  H_O = pool_out_dim(H_I, H_P, PAD),
  localparam int  W_O = pool_out_dim(W_I, W_P, PAD)
) (
  input  logic clk,
  input  logic rst,
  input  logic i_start,
  input  logic i_in_we  [H_I*D],
  input  val_t i_in     [H_I*D][W_I],
  output val_t o_out    [H_O*D][W_O],
  output logic o_out_we [H_O*D]
);
  localparam int N_RU = pool_n_ru(H_O, D, C);
  localparam int LAT  = pool_latency(H_P, W_P);
  localparam int SW   = $clog2(H_O + 1);
  localparam int CHW  = (D > 1) ? $clog2(D) : 1;
  localparam int CW   = $clog2(C + 1);

  val_t buf_rows [H_I*D][W_I];
  input_buffer_memory #(.N_ROWS(H_I*D), .ROW_W(W_I)) u_buf (
    .clk (clk), .i_we (i_in_we), .i_data (i_in), .o_data (buf_rows)
  );

  logic           load  [N_RU];
  logic [SW-1:0]  slice [N_RU];
  logic [CHW-1:0] ch    [N_RU];
  logic           res_valid;
  logic [CW-1:0]  res_idx;

  pool_controller #(.H_O(H_O), .D(D), .N_RU(N_RU), .LAT(LAT), .C(C), .SW(SW), .CHW(CHW)) u_ctrl (
    .clk (clk), .rst (rst), .i_start (i_start), .o_load (load), .o_slice (slice), .o_ch (ch),
    .o_valid (res_valid), .o_idx (res_idx)
  );

  val_t ru_res [N_RU][W_O];
  for (genvar r = 0; r < N_RU; r++) begin : g_ru
    val_t win [H_P][W_O*W_P];
    pool_working_memory #(.H_I(H_I), .W_I(W_I), .D(D), .H_P(H_P), .W_P(W_P), .W_O(W_O),
                          .PAD_LO_H(pool_pad_lo(H_I, H_P, PAD)),
                          .PAD_LO_W(pool_pad_lo(W_I, W_P, PAD)), .SW(SW), .CHW(CHW)) u_wm (
      .clk (clk), .i_buf (buf_rows), .i_load (load[r]), .i_slice (slice[r]), .i_ch (ch[r]),
      .o_win (win)
    );
    pool_row_unit #(.H_P(H_P), .W_P(W_P), .W_O(W_O)) u_ru (
      .clk (clk), .i_win (win), .o_max (ru_res[r])
    );
  end

  result_multicast #(.N_SRC(N_RU), .N_DST(H_O*D), .ROW_W(W_O), .GROUP(1), .IW(CW)) u_mc (
    .i_data (ru_res), .i_valid (res_valid), .i_idx (res_idx),
    .o_data (o_out), .o_we (o_out_we)
  );
endmodule
