// conv_working_memory: working memory of the 2D convolution layer.
//
// Holds NSLOTS consecutive input slices (all widths and channels) taken from
// the layer's buffer memory. Slot q holds input slice base + SLOT_OFF + q,
// where base is given by the controller for the current range of output
// slices; slices beyond the input height read as zero. The controller loads
// the memory channel by channel: when i_load[d] is high, channel d of every
// slot is copied from the buffer memory at the end of the cycle, with the
// slice base i_base[d]. Channel d is loaded one cycle after channel d-1, in
// step with the DSP pipelines of the row units, which weight channel d one
// cycle after channel d-1; so no channel is replaced while an older output
// channel still needs it.
// The 'long' working memory (SLOT_OFF = 0) feeds the long row units; the
// 'short' one (SLOT_OFF = number of long row units + H_K - 1) holds only the
// extra slices the short row units need, and is loaded one range less often.
module conv_working_memory
  import nn_pkg::*;
#(
  parameter int H_I      = 7,
  parameter int W_I      = 7,
  parameter int D_I      = 1,
  parameter int NSLOTS   = 2,
  parameter int SLOT_OFF = 0,
  localparam int BW      = $clog2(H_I + 1)
) (
  input  logic          clk,
  input  val_t          i_buf  [H_I*D_I][W_I],   // buffer memory, row h*D_I+d
  input  logic          i_load [D_I],
  input  logic [BW-1:0] i_base [D_I],
  output val_t          o_slot [NSLOTS][D_I][W_I]
);
  val_t mem [NSLOTS][D_I][W_I];

  for (genvar d = 0; d < D_I; d++) begin : g_ch
    for (genvar q = 0; q < NSLOTS; q++) begin : g_slot
      int h;
      assign h = int'(i_base[d]) + SLOT_OFF + q;
      always_ff @(posedge clk) begin
        if (i_load[d]) begin
          if (h < H_I) mem[q][d] <= i_buf[h*D_I + d];
          else         mem[q][d] <= '{default: '0};
        end
      end
    end
  end

  assign o_slot = mem;
endmodule
