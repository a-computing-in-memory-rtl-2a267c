// mat_bus -- one N-bit mat-level bus (A or B) between the PEs and its
// register.
//
// Upward, the output of the PE picked by the decoder selector lines is put on
// the bus towards the register (AND-OR multiplexing over all PEs). Downward
// (the reverse pathway used by permutation) the register value is offered to
// the selected PE only; every other PE sees zero. Only one PE may be selected
// per bus, which keeps the bus free of conflicts; an assertion checks it.
// Purely combinational.
//
// The N-bit width and the one-PE-per-bus rule are the paper's; AND-OR
// multiplexing is this design's own.
module mat_bus #(
  parameter int unsigned P = 16,
  parameter int unsigned Q = 16,
  parameter int unsigned N = 1024
) (
  input  logic [P*Q-1:0] pe_sel,
  input  logic [N-1:0]   pe_dout [P*Q],
  input  logic [N-1:0]   reg_q,
  output logic [N-1:0]   to_reg,
  output logic [N-1:0]   to_pe   [P*Q]
);

  always_comb begin
    to_reg = '0;
    for (int unsigned i = 0; i < P*Q; i++) begin
      to_reg   |= pe_dout[i] & {N{pe_sel[i]}};
      to_pe[i]  = reg_q & {N{pe_sel[i]}};
    end
  end

  always_comb assert ($onehot0(pe_sel)) else $error("mat_bus: more than one PE selected");

endmodule
