// csa -- customized sense amplifier of a PE.
//
// It reads the bitline (bl) and bitline-bar (blb) of every column after one
// or two rows were activated, and an internal multiplexer picks one result:
//   READ / AND : bl                (one row: its value; two rows: AND)
//   NOT        : blb               (one row activated)
//   OR         : ~blb              (two rows: NOT of their NOR)
//   XOR        : ~bl & ~blb        (the two cells differ)
//   ADD        : X + Y + cin       (ripple carry across the columns; the
//                                   generate term is bl, the propagate term
//                                   is the XOR above)
// Subtraction X - Y is NOT Y written back, then ADD with cin = 1; pointwise
// multiplication of bipolar hypervectors stored as one bit per element is
// XOR. Purely combinational.
//
// The operations and the carry-in used for subtraction come from the paper;
// deriving them from bl/blb as in bitline computing, a single carry chain
// over the whole row and the bipolar-to-bit mapping are this design's own
// choices.
module csa
  import imodhd_pkg::*;
#(
  parameter int unsigned N = 1024
) (
  input  csa_op_e      op,
  input  logic         cin,
  input  logic [N-1:0] bl,
  input  logic [N-1:0] blb,
  output logic [N-1:0] result,
  output logic         cout
);

  logic [N-1:0] x_and, x_or, x_xor, sum;
  logic         carry_out;

  assign x_and = bl;
  assign x_or  = ~blb;
  assign x_xor = ~bl & ~blb;

  always_comb begin
    logic c;
    c = cin;
    for (int unsigned i = 0; i < N; i++) begin
      sum[i] = x_xor[i] ^ c;
      c      = x_and[i] | (x_xor[i] & c);
    end
    carry_out = c;
  end

  assign cout = (op == CSA_ADD) ? carry_out : 1'b0;

  always_comb begin
    unique case (op)
      CSA_READ: result = bl;
      CSA_NOT:  result = blb;
      CSA_AND:  result = x_and;
      CSA_OR:   result = x_or;
      CSA_XOR:  result = x_xor;
      CSA_ADD:  result = sum;
      default:  result = bl;
    endcase
  end

endmodule
