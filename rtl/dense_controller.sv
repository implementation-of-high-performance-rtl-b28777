// dense_controller: control of a fully-connected layer.
//
// A start pulse (layer enable) marks cycle 0 of a data set; one arrives every
// C cycles while data flows. A cycle counter restarted by the pulse walks
// through the C neuron slots and addresses the weight memory of stage 0; the
// address of stage s is the same sequence delayed by s cycles, so that the
// weights of stage s for slot m are read in cycle s+m and presented (after
// the registered read) in cycle s+1+m, in step with the partial sum
// travelling down the DSP pipeline. The start pulse delayed by LAT cycles
// opens the result window: o_valid is high for N_SLOTS cycles and o_idx gives
// the slot whose results are on the neuron-unit outputs.
module dense_controller #(
  parameter int C       = 16,
  parameter int S       = 9,     // pipeline stages
  parameter int N_SLOTS = 10,    // neurons per neuron unit (rounded up)
  parameter int LAT     = 12,    // start to first result
  localparam int AW     = (C > 1) ? $clog2(C) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          i_start,
  output logic [AW-1:0] o_waddr [S],
  output logic          o_valid,
  output logic [AW-1:0] o_idx
);
  logic [AW-1:0] k_q, k;
  assign k = i_start ? '0 : k_q;

  always_ff @(posedge clk) begin
    if (rst) k_q <= '0;
    else     k_q <= (k == AW'(C-1)) ? '0 : k + 1'b1;
  end

  assign o_waddr[0] = k;
  for (genvar s = 1; s < S; s++) begin : g_skew
    always_ff @(posedge clk) o_waddr[s] <= o_waddr[s-1];
  end

  // start pulse delayed to the first result
  logic [LAT-1:0] st_q;
  always_ff @(posedge clk) begin
    if (rst) st_q <= '0;
    else     st_q <= {st_q[LAT-2:0], i_start};
  end

  logic [AW:0] oc_q;   // output slot counter, N_SLOTS = idle
  always_ff @(posedge clk) begin
    if (rst)                 oc_q <= (AW+1)'(N_SLOTS);
    else if (st_q[LAT-1])    oc_q <= 1;
    else if (oc_q < (AW+1)'(N_SLOTS)) oc_q <= oc_q + 1'b1;
  end

  assign o_valid = st_q[LAT-1] || (oc_q < (AW+1)'(N_SLOTS));
  assign o_idx   = st_q[LAT-1] ? '0 : oc_q[AW-1:0];
endmodule
