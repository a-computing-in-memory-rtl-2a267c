// mat_decoder -- one pair of mat-level decoders (row and column) that picks
// PE A or PE B out of the P x Q mat.
//
// The PE address has log2(P) + log2(Q) bits. The log2(P) most significant
// bits go to the row decoder, the log2(Q) least significant bits to the
// column decoder; each raises one selector line, and the PE where the row
// and column lines cross is selected (pe_sel index p*Q + q). With `en` low no
// line is raised. Purely combinational.
//
// The address split and the row/column decoder pair are the paper's; the
// enable and the PE numbering are this design's own.
module mat_decoder #(
  parameter int unsigned P = 16,
  parameter int unsigned Q = 16
) (
  input  logic                           en,
  input  logic [$clog2(P)+$clog2(Q)-1:0] addr,
  output logic [P-1:0]                   row_sel,
  output logic [Q-1:0]                   col_sel,
  output logic [P*Q-1:0]                 pe_sel
);

  localparam int unsigned PB = $clog2(P);
  localparam int unsigned QB = $clog2(Q);

  logic [PB-1:0] row_addr;
  logic [QB-1:0] col_addr;
  assign row_addr = addr[PB+QB-1:QB];
  assign col_addr = addr[QB-1:0];

  always_comb begin
    row_sel = '0;
    col_sel = '0;
    for (int unsigned p = 0; p < P; p++) row_sel[p] = en && (row_addr == PB'(p));
    for (int unsigned q = 0; q < Q; q++) col_sel[q] = en && (col_addr == QB'(q));
    for (int unsigned p = 0; p < P; p++)
      for (int unsigned q = 0; q < Q; q++)
        pe_sel[p*Q+q] = row_sel[p] & col_sel[q];
  end

endmodule
