// pool_controller: control of the max-pooling layer.
//
// Allocation: output rows are numbered n = slice*D + channel (top slice
// first, top channel first) and handed out interleaved, row unit r taking row
// n = k*N_RU + r in cycle k after the start pulse. For every row unit the
// controller gives the output slice and channel whose input rows its working
// memory loads in cycle k (o_load low when the row does not exist), and it
// opens the result window POOL_LAT cycles later: o_valid for ACTIVE cycles,
// with o_idx = k.
module pool_controller #(
  parameter int H_O  = 3,
  parameter int D    = 1,
  parameter int N_RU = 1,
  parameter int LAT  = 3,
  parameter int C    = 16,
  parameter int SW   = 3,
  parameter int CHW  = 1,
  localparam int CW  = $clog2(C + 1)
) (
  input  logic           clk,
  input  logic           rst,
  input  logic           i_start,
  output logic           o_load  [N_RU],
  output logic [SW-1:0]  o_slice [N_RU],
  output logic [CHW-1:0] o_ch    [N_RU],
  output logic           o_valid,
  output logic [CW-1:0]  o_idx
);
  localparam int ROWS   = H_O * D;
  localparam int ACTIVE = (ROWS + N_RU - 1) / N_RU;

  logic [CW-1:0] k_q, k;
  assign k = i_start ? '0 : k_q;

  always_ff @(posedge clk) begin
    if (rst)                     k_q <= CW'(ACTIVE);
    else if (k < CW'(ACTIVE))    k_q <= k + 1'b1;
  end

  for (genvar r = 0; r < N_RU; r++) begin : g_ru
    int n;
    assign n          = int'(k) * N_RU + r;
    assign o_load[r]  = (k < CW'(ACTIVE)) && (n < ROWS);
    assign o_slice[r] = SW'(n / D);
    assign o_ch[r]    = CHW'(n % D);
  end

  logic [LAT-1:0] st_q;
  logic [CW-1:0]  oc_q;
  always_ff @(posedge clk) begin
    if (rst) st_q <= '0;
    else     st_q <= {st_q[LAT-2:0], i_start};
    if (rst)                     oc_q <= CW'(ACTIVE);
    else if (st_q[LAT-1])        oc_q <= CW'(1);
    else if (oc_q < CW'(ACTIVE)) oc_q <= oc_q + 1'b1;
  end
  assign o_valid = st_q[LAT-1] || (oc_q < CW'(ACTIVE));
  assign o_idx   = st_q[LAT-1] ? '0 : oc_q;
endmodule
