// imodhd_top -- IM-ODHD: an SRAM compute-in-memory mat for hyperdimensional
// outlier detection, with its permutation sequencer.
//
// The mat (cim_mat) holds P x Q PEs of M x N SRAM cells that compute in
// place: binding (XOR), bundling (addition), masking (AND/OR), negation,
// subtraction and small shifts, all on whole rows at once, plus two
// mat-level registers and buses that move rows between PEs. Permutation of a
// hypervector spread over several PEs is run by perm_seq; every other step
// of the outlier-detection flow (loading seed hypervectors, bundling,
// similarity, threshold) is issued by an outside controller through the
// host_* ports, one mat command per cycle.
//
// While the sequencer is busy it owns the mat and host commands are ignored
// (host register loads included); otherwise the host drives the mat
// directly. perm_done pulses for one cycle when a permutation ends.
//
// The mat and the permutation procedure follow the paper; the host command
// ports and the arbitration are this design's own.
module imodhd_top
  import imodhd_pkg::*;
#(
  parameter int unsigned P = 16,
  parameter int unsigned Q = 16,
  parameter int unsigned M = 1024,
  parameter int unsigned N = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // direct mat commands
  input  pe_cmd_t                        host_cmd0,
  input  pe_cmd_t                        host_cmd1,
  input  pe_role_e                       host_role       [P*Q],
  input  shift_mask_t                    host_shift_mask [P*Q],
  input  logic [$clog2(P)+$clog2(Q)-1:0] host_addr_a,
  input  bus_op_e                        host_bus_op_a,
  input  logic [N-1:0]                   host_data_a,
  input  logic [$clog2(P)+$clog2(Q)-1:0] host_addr_b,
  input  bus_op_e                        host_bus_op_b,
  input  logic [N-1:0]                   host_data_b,
  // permutation requests
  input  logic                           perm_start,
  input  logic [$clog2(P)+$clog2(Q)-1:0] perm_base,
  input  logic [$clog2(P)+$clog2(Q):0]   perm_len,
  input  logic [$clog2(N)-1:0]           perm_shift,
  input  perm_rows_t                     perm_rows,
  output logic                           perm_busy,
  output logic                           perm_done,
  // mat registers
  output logic [N-1:0]                   reg_a,
  output logic [N-1:0]                   reg_b
);

  localparam int unsigned NPE = P * Q;
  localparam int unsigned AW  = $clog2(P) + $clog2(Q);

  pe_cmd_t     seq_cmd0, seq_cmd1, mat_cmd0, mat_cmd1;
  pe_role_e    seq_role [NPE], mat_role [NPE];
  shift_mask_t seq_mask [NPE], mat_mask [NPE];
  logic [AW-1:0] seq_addr_a, seq_addr_b, mat_addr_a, mat_addr_b;
  bus_op_e     seq_op_a, seq_op_b, mat_op_a, mat_op_b;

  perm_seq #(.P(P), .Q(Q), .N(N)) u_perm (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (perm_start),
    .cfg_base   (perm_base),
    .cfg_len    (perm_len),
    .cfg_shift  (perm_shift),
    .cfg_rows   (perm_rows),
    .busy       (perm_busy),
    .done       (perm_done),
    .cmd0       (seq_cmd0),
    .cmd1       (seq_cmd1),
    .role       (seq_role),
    .shift_mask (seq_mask),
    .addr_a     (seq_addr_a),
    .bus_op_a   (seq_op_a),
    .addr_b     (seq_addr_b),
    .bus_op_b   (seq_op_b)
  );

  always_comb begin
    if (perm_busy) begin
      mat_cmd0   = seq_cmd0;
      mat_cmd1   = seq_cmd1;
      mat_role   = seq_role;
      mat_mask   = seq_mask;
      mat_addr_a = seq_addr_a;
      mat_op_a   = seq_op_a;
      mat_addr_b = seq_addr_b;
      mat_op_b   = seq_op_b;
    end else begin
      mat_cmd0   = host_cmd0;
      mat_cmd1   = host_cmd1;
      mat_role   = host_role;
      mat_mask   = host_shift_mask;
      mat_addr_a = host_addr_a;
      mat_op_a   = host_bus_op_a;
      mat_addr_b = host_addr_b;
      mat_op_b   = host_bus_op_b;
    end
  end

  cim_mat #(.P(P), .Q(Q), .M(M), .N(N)) u_mat (
    .clk         (clk),
    .rst_n       (rst_n),
    .cmd0        (mat_cmd0),
    .cmd1        (mat_cmd1),
    .role        (mat_role),
    .shift_mask  (mat_mask),
    .addr_a      (mat_addr_a),
    .bus_op_a    (mat_op_a),
    .host_data_a (host_data_a),
    .addr_b      (mat_addr_b),
    .bus_op_b    (mat_op_b),
    .host_data_b (host_data_b),
    .reg_a       (reg_a),
    .reg_b       (reg_b)
  );

endmodule
