// sram_array -- the M x N 6T-SRAM cell array of one PE, with its two word
// line decoders (X and Y).
//
// Each decoder can raise one word line. With one word line up the bitlines
// carry the stored row (bl) and its complement (blb). With two word lines up
// (double sensing) every bitline is pulled low if either cell holds 0, so bl
// is the AND of the two rows and blb the AND of their complements, i.e. their
// NOR. The sense amplifier above the array turns these two values into logic
// and arithmetic results. The array also has one write port, used by the
// write driver (data from outside the PE) and the copy driver (local write of
// a computed result).
//
// Timing: sensing is combinational within the cycle; a write takes effect at
// the rising clock edge, so a row may be read and overwritten in the same
// cycle. Row r, column c is mem[r][c]; column N-1 is the first (leftmost,
// most significant) column.
//
// The double-sensing behaviour follows the paper. Modelling the decoders as
// indexed row selection, the separate write row address and the cycle timing
// are this design's own choices. Contents are not reset, like an SRAM.
module sram_array #(
  parameter int unsigned M = 1024,  // rows
  parameter int unsigned N = 1024   // columns
) (
  input  logic                 clk,
  input  logic                 wl_x_en,
  input  logic [$clog2(M)-1:0] wl_x_row,
  input  logic                 wl_y_en,
  input  logic [$clog2(M)-1:0] wl_y_row,
  output logic [N-1:0]         bl,
  output logic [N-1:0]         blb,
  input  logic                 we,
  input  logic [$clog2(M)-1:0] wrow,
  input  logic [N-1:0]         wdata
);

  logic [N-1:0] mem [M];

  logic [N-1:0] cell_x, cell_y;
  assign cell_x = mem[wl_x_row];
  assign cell_y = mem[wl_y_row];

  // Precharged bitlines stay high unless an activated cell pulls them down.
  always_comb begin
    bl  = '1;
    blb = '1;
    if (wl_x_en) begin
      bl  &= cell_x;
      blb &= ~cell_x;
    end
    if (wl_y_en) begin
      bl  &= cell_y;
      blb &= ~cell_y;
    end
  end

  always_ff @(posedge clk) begin
    if (we) mem[wrow] <= wdata;
  end

endmodule
