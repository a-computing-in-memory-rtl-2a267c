// cim_pe -- one processing element (SRAM subarray) of the IM-ODHD mat.
//
// Data path of one cycle: word line decoders X and Y activate one or two
// rows of the M x N array, the customized sense amplifier combines them
// (read, NOT, AND, OR, XOR, add with carry-in), the logarithmic shifter moves
// the result by 0..3 bits left or right under this PE's 3-bit shift mask, and
// the result leaves on dout towards the mat-level buses. At the rising edge
// the copy driver may write that result into row W, or the write driver may
// write din (the value on the PE's bus) into row W.
//
// Interface: `active` says whether the PE executes `cmd` this cycle; when it
// is low no row is activated and nothing is written. dout is combinational.
//
// The structure (array, two word line decoders, CSA, logarithmic shifter,
// copy and write drivers) follows the paper. One command per clock and the
// command fields are this design's own.
module cim_pe
  import imodhd_pkg::*;
#(
  parameter int unsigned M = 1024,
  parameter int unsigned N = 1024
) (
  input  logic         clk,
  input  logic         active,
  input  pe_cmd_t      cmd,
  input  shift_mask_t  shift_mask,
  input  logic [N-1:0] din,
  output logic [N-1:0] dout
);

  localparam int unsigned RW = $clog2(M);

  logic [N-1:0] bl, blb, csa_out, wdata;
  logic         we, cout_unused;

  sram_array #(.M(M), .N(N)) u_array (
    .clk      (clk),
    .wl_x_en  (active),
    .wl_x_row (cmd.row_x[RW-1:0]),
    .wl_y_en  (active && two_rows(cmd.op)),
    .wl_y_row (cmd.row_y[RW-1:0]),
    .bl       (bl),
    .blb      (blb),
    .we       (we),
    .wrow     (cmd.row_w[RW-1:0]),
    .wdata    (wdata)
  );

  csa #(.N(N)) u_csa (
    .op     (cmd.op),
    .cin    (cmd.cin),
    .bl     (bl),
    .blb    (blb),
    .result (csa_out),
    .cout   (cout_unused)
  );

  log_shifter #(.N(N)) u_shift (
    .mask (shift_mask),
    .din  (csa_out),
    .dout (dout)
  );

  write_copy_driver #(.N(N)) u_wdrv (
    .active  (active),
    .sel     (cmd.wr),
    .data_in (din),
    .copy_in (dout),
    .we      (we),
    .wdata   (wdata)
  );

  initial assert (M <= 2 ** ROW_AW) else $error("cim_pe: M exceeds the command row address range");

endmodule
