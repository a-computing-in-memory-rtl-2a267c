// log_shifter -- logarithmic bit shifter between the sense amplifier and the
// copy driver of a PE.
//
// A 3-bit shift mask sets direction and amount (0..3 positions). The shift is
// done in two stages: the first moves the word by one position if amount
// bit 0 is set, the second by two positions if amount bit 1 is set, so any
// amount up to 3 takes one pass. Vacated positions are filled with zeros: a
// right shift by s divides by 2^s rounding down. Larger shifts are done by
// the controller in several passes. Purely combinational.
//
// The 3-bit mask with one direction bit and a 0..3 amount is the paper's;
// the assignment of the mask bits (bit 2 = left) is this design's own.
module log_shifter
  import imodhd_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  shift_mask_t  mask,
  input  logic [N-1:0] din,
  output logic [N-1:0] dout
);

  logic [N-1:0] stage1;

  always_comb begin
    if (!mask.amt[0])  stage1 = din;
    else if (mask.left) stage1 = din << 1;
    else                stage1 = din >> 1;

    if (!mask.amt[1])  dout = stage1;
    else if (mask.left) dout = stage1 << 2;
    else                dout = stage1 >> 2;
  end

endmodule
