// conv_controller: control of the 2D convolution layer (regular case).
//
// Allocation scheme: in cycle k after the start pulse every row unit r
// computes output channel k mod D_O of output slice r + N_RU*(k / D_O). So
// all row units step through the channels of their slice together and move
// on to the next range of N_RU slices every D_O cycles; long row units cover
// R_LONG ranges, short ones R_LONG-1.
// Derived control, each generated for channel/stage 0 and delayed by d
// cycles for input channel d:
//  * working-memory loads: at the first cycle of range j the long memory
//    (ranges < R_LONG) and the short memory (ranges < R_LONG-1) load with
//    slice base j*N_RU;
//  * weight addresses: the output channel being computed;
//  * result window: the start pulse delayed by LAT opens R_LONG*D_O valid
//    cycles, with o_idx = k.
module conv_controller #(
  parameter int C      = 16,
  parameter int D_I    = 1,
  parameter int D_O    = 1,
  parameter int N_RU   = 1,
  parameter int R_LONG = 6,
  parameter int LAT    = 7,
  parameter int H_I    = 7,
  localparam int KW    = (D_O > 1) ? $clog2(D_O) : 1,
  localparam int BW    = $clog2(H_I + 1),
  localparam int CW    = $clog2(C + 1)
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          i_start,
  output logic          o_load_long  [D_I],
  output logic          o_load_short [D_I],
  output logic [BW-1:0] o_base       [D_I],
  output logic [KW-1:0] o_waddr      [D_I],
  output logic          o_valid,
  output logic [CW-1:0] o_idx
);
  localparam int ACTIVE = R_LONG * D_O;

  // cycle, channel and range counters; k = ACTIVE means idle
  logic [CW-1:0] k_q, k;
  logic [KW-1:0] ch_q, ch;
  logic [BW-1:0] j_q, j;
  assign k  = i_start ? '0 : k_q;
  assign ch = i_start ? '0 : ch_q;
  assign j  = i_start ? '0 : j_q;

  logic active;
  assign active = (k < CW'(ACTIVE));

  always_ff @(posedge clk) begin
    if (rst) begin
      k_q  <= CW'(ACTIVE);
      ch_q <= '0;
      j_q  <= '0;
    end else if (active) begin
      k_q <= k + 1'b1;
      if (ch == KW'(D_O-1)) begin
        ch_q <= '0;
        j_q  <= j + 1'b1;
      end else begin
        ch_q <= ch + 1'b1;
        j_q  <= j;
      end
    end
  end

  // stage 0 control
  assign o_load_long[0]  = active && (ch == '0) && (j < BW'(R_LONG));
  assign o_load_short[0] = active && (ch == '0) && (j < BW'(R_LONG-1));
  assign o_base[0]       = BW'(int'(j) * N_RU);
  assign o_waddr[0]      = ch;

  for (genvar d = 1; d < D_I; d++) begin : g_skew
    always_ff @(posedge clk) begin
      if (rst) begin
        o_load_long[d]  <= 1'b0;
        o_load_short[d] <= 1'b0;
      end else begin
        o_load_long[d]  <= o_load_long[d-1];
        o_load_short[d] <= o_load_short[d-1];
      end
      o_base[d]  <= o_base[d-1];
      o_waddr[d] <= o_waddr[d-1];
    end
  end

  // result window
  logic [LAT-1:0] st_q;
  logic [CW-1:0]  oc_q;
  always_ff @(posedge clk) begin
    if (rst) st_q <= '0;
    else     st_q <= {st_q[LAT-2:0], i_start};
    if (rst)                    oc_q <= CW'(ACTIVE);
    else if (st_q[LAT-1])       oc_q <= CW'(1);
    else if (oc_q < CW'(ACTIVE)) oc_q <= oc_q + 1'b1;
  end
  assign o_valid = st_q[LAT-1] || (oc_q < CW'(ACTIVE));
  assign o_idx   = st_q[LAT-1] ? '0 : oc_q;
endmodule
