// dsp_mac: behaviour of one DSP slice in its "w*i + b" mode, as used by all
// multiply-accumulate pipelines of the network.
//
// Three register levels are enabled, as needed for full DSP clock rate: the
// input registers (value and weight), the product register and the
// accumulation register. The cascaded partial sum b (i_pcin) of the previous
// DSP enters without a register right before the accumulation register.
// Timing: a value/weight pair presented in cycle t is multiplied into the
// product register at t+2 and appears, added to i_pcin of cycle t+2, at o_p in
// cycle t+3. A chain of N DSPs, each presented one cycle after its
// predecessor, therefore has a latency of N+2 cycles from the first
// presentation, i.e. 3 for the first DSP and 1 for every further one.
// The localized (self-accumulating) mode of the silicon DSP is not used by the
// layers and is not modelled.
module dsp_mac
  import nn_pkg::*;
(
  input  logic clk,
  input  val_t i_val,    // input value i
  input  wgt_t i_wgt,    // weight w
  input  acc_t i_pcin,   // partial result b of the previous DSP
  output acc_t o_p       // w*i + b
);
  val_t a_q;
  wgt_t b_q;
  acc_t m_q;
  acc_t p_q;

  always_ff @(posedge clk) begin
    a_q <= i_val;
    b_q <= i_wgt;
    m_q <= acc_t'(a_q) * acc_t'(b_q);
    p_q <= m_q + i_pcin;
  end

  assign o_p = p_q;
endmodule
