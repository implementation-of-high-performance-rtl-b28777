// flatten_regularizer: flattening step between the last 2D layer and the
// first fully-connected layer.
//
// The fully-connected layer has no buffer memory: it expects the inputs of
// pipeline stage s (flat inputs s*P .. s*P+P-1) to be written exactly in
// cycle s of its schedule. The 2D layer produces rows in its own order, so
// this auxiliary layer stores the incoming rows (row n = slice*D + channel,
// W values each) in a buffer memory and re-emits them in stage order.
// Flattening is C-like: element (slice o, column y, channel c) becomes flat
// input o*W*D + y*D + c.
// Timing: group s is read from the buffer in cycle s after i_start and
// appears on o_out with o_out_we high in cycle s+1 (one cycle of extra
// delay), so the fully-connected layer is started one cycle after this one.
module flatten_regularizer
  import nn_pkg::*;
#(
  parameter int H = 3,
  parameter int W = 3,
  parameter int D = 1,
  parameter int P = 1,
  parameter int C = 16,
  localparam int N = H * W * D
) (
  input  logic clk,
  input  logic rst,
  input  logic i_start,
  input  logic i_in_we  [H*D],
  input  val_t i_in     [H*D][W],
  output val_t o_out    [N],
  output logic o_out_we [N]
);
  localparam int S  = (N + P - 1) / P;
  localparam int CW = $clog2(C + S + 1);

  val_t rows [H*D][W];
  input_buffer_memory #(.N_ROWS(H*D), .ROW_W(W)) u_buf (
    .clk (clk), .i_we (i_in_we), .i_data (i_in), .o_data (rows)
  );

  // flat view of the stored rows
  val_t flat [N];
  for (genvar o = 0; o < H; o++) begin : g_o
    for (genvar y = 0; y < W; y++) begin : g_y
      for (genvar c = 0; c < D; c++) begin : g_c
        assign flat[o*W*D + y*D + c] = rows[o*D + c][y];
      end
    end
  end

  logic [CW-1:0] s_q, s;
  assign s = i_start ? '0 : s_q;
  always_ff @(posedge clk) begin
    if (rst)               s_q <= CW'(S);
    else if (s < CW'(S))   s_q <= s + 1'b1;
  end

  for (genvar i = 0; i < N; i++) begin : g_out
    localparam int GRP = i / P;
    always_ff @(posedge clk) begin
      if (rst) begin
        o_out_we[i] <= 1'b0;
      end else begin
        o_out_we[i] <= (s == CW'(GRP));
      end
      if (s == CW'(GRP)) o_out[i] <= flat[i];
    end
  end
endmodule
