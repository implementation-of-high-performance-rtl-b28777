// act_unit: activation at the end of a DSP pipeline.
//
// The ACC_W-bit sum is first rescaled to a 6.8 value (see nn_pkg::rescale),
// then the activation is applied: relu (RELU=1) or linear (RELU=0).
// Two relu implementations are offered, as in the original design:
//  * FF_IMPL=0: combinational; every pair of value bits is replicated when the
//    sign is positive and forced to zero when negative (the LUT variant).
//  * FF_IMPL=1: a register per non-sign bit whose synchronous reset is the
//    sign bit (the flip-flop variant); adds one cycle of latency.
// For the linear activation FF_IMPL still decides whether the result is
// registered, so the latency is FF_IMPL cycles in every case.
module act_unit
  import nn_pkg::*;
#(
  parameter bit RELU    = 1'b1,
  parameter bit FF_IMPL = 1'b1
) (
  input  logic clk,
  input  acc_t i_acc,
  output val_t o_val
);
  val_t v;
  assign v = rescale(i_acc);

  // sign bit acts as (synchronous) clear of the value bits
  logic clr;
  assign clr = RELU && v[VAL_W-1];

  if (FF_IMPL) begin : g_ff
    always_ff @(posedge clk) begin
      if (clr) o_val <= '0;
      else     o_val <= v;
    end
  end else begin : g_lut
    assign o_val = clr ? val_t'(0) : v;
  end
endmodule
