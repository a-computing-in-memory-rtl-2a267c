// write_copy_driver -- the write driver and copy driver of a PE.
//
// The write driver puts data that arrives from a mat-level register (over
// bus A or B) into a row; the copy driver, aligned with the sense amplifier
// columns, writes the shifter output back into a row of the same PE (a local
// write). Both share the array's write port: this block selects the source
// and raises the write enable only when the PE takes part in the cycle.
// Purely combinational; the array writes at the next rising clock edge.
//
// The two drivers and their roles are the paper's; sharing one write port
// and the select encoding are this design's own.
module write_copy_driver
  import imodhd_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  logic         active,
  input  wr_sel_e      sel,
  input  logic [N-1:0] data_in,
  input  logic [N-1:0] copy_in,
  output logic         we,
  output logic [N-1:0] wdata
);

  always_comb begin
    we    = 1'b0;
    wdata = copy_in;
    if (active) begin
      unique case (sel)
        WR_COPY: begin we = 1'b1; wdata = copy_in; end
        WR_DATA: begin we = 1'b1; wdata = data_in; end
        default: we = 1'b0;
      endcase
    end
  end

endmodule
