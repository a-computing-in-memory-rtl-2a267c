// mat_register -- an N-bit mat-level register (register A or B).
//
// On BUS_PE_TO_REG it captures, at the rising edge, the output of the PE
// selected on its bus; on BUS_HOST_TO_REG it captures data from outside the
// mat (initial hypervectors, masks). Otherwise it holds its value, which
// drives the reverse path into a PE on BUS_REG_TO_PE and is visible at q.
// Synchronous active-low reset clears it.
//
// The register and its PE <-> register traffic are the paper's; the host
// load port and the reset are this design's own.
module mat_register
  import imodhd_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  bus_op_e      op,
  input  logic [N-1:0] from_bus,
  input  logic [N-1:0] from_host,
  output logic [N-1:0] q
);

  always_ff @(posedge clk) begin
    if (!rst_n)                      q <= '0;
    else if (op == BUS_PE_TO_REG)    q <= from_bus;
    else if (op == BUS_HOST_TO_REG)  q <= from_host;
  end

endmodule
