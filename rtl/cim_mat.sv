// cim_mat -- the P x Q compute-in-memory mat of IM-ODHD.
//
// P x Q PEs (each an M x N SRAM subarray that computes) share two mat-level
// N-bit buses with registers A and B. Two decoder pairs select PE A and PE B
// by address; the selected PE's output can be captured in its register, and
// a register value can be written back into the selected PE (the reverse
// path that permutation uses to move bits between PEs). A 3 x P x Q-bit bus
// gives every PE its own shift mask.
//
// Each cycle the mat receives two PE commands, cmd0 and cmd1, and a role per
// PE (idle, cmd0 or cmd1), so that two groups of PEs (for example source and
// destination PEs of a permutation) run different operations at once. A
// PE's data-in is bus A when it is PE A, otherwise bus B. When both buses
// move data towards the registers in the same cycle, both transfers happen.
//
// Timing: PE outputs are combinational; registers and rows are written at
// the rising edge. A PE -> register move and a register -> PE move therefore
// take one cycle each.
//
// Mat structure, bus widths and the shift-mask bus follow the paper. The
// two-command/role scheme and the host ports are this design's own.
module cim_mat
  import imodhd_pkg::*;
#(
  parameter int unsigned P = 16,
  parameter int unsigned Q = 16,
  parameter int unsigned M = 1024,
  parameter int unsigned N = 1024
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  pe_cmd_t                        cmd0,
  input  pe_cmd_t                        cmd1,
  input  pe_role_e                       role       [P*Q],
  input  shift_mask_t                    shift_mask [P*Q],
  input  logic [$clog2(P)+$clog2(Q)-1:0] addr_a,
  input  bus_op_e                        bus_op_a,
  input  logic [N-1:0]                   host_data_a,
  input  logic [$clog2(P)+$clog2(Q)-1:0] addr_b,
  input  bus_op_e                        bus_op_b,
  input  logic [N-1:0]                   host_data_b,
  output logic [N-1:0]                   reg_a,
  output logic [N-1:0]                   reg_b
);

  localparam int unsigned NPE = P * Q;

  logic [P-1:0]   row_sel_a, row_sel_b;
  logic [Q-1:0]   col_sel_a, col_sel_b;
  logic [NPE-1:0] sel_a, sel_b;
  logic [N-1:0]   pe_dout [NPE];
  logic [N-1:0]   down_a  [NPE];
  logic [N-1:0]   down_b  [NPE];
  logic [N-1:0]   up_a, up_b;

  // A decoder pair is used whenever its bus moves data between a PE and
  // its register.
  mat_decoder #(.P(P), .Q(Q)) u_dec_a (
    .en      (bus_op_a == BUS_PE_TO_REG || bus_op_a == BUS_REG_TO_PE),
    .addr    (addr_a),
    .row_sel (row_sel_a),
    .col_sel (col_sel_a),
    .pe_sel  (sel_a)
  );

  mat_decoder #(.P(P), .Q(Q)) u_dec_b (
    .en      (bus_op_b == BUS_PE_TO_REG || bus_op_b == BUS_REG_TO_PE),
    .addr    (addr_b),
    .row_sel (row_sel_b),
    .col_sel (col_sel_b),
    .pe_sel  (sel_b)
  );

  mat_bus #(.P(P), .Q(Q), .N(N)) u_bus_a (
    .pe_sel (sel_a), .pe_dout (pe_dout), .reg_q (reg_a), .to_reg (up_a), .to_pe (down_a)
  );

  mat_bus #(.P(P), .Q(Q), .N(N)) u_bus_b (
    .pe_sel (sel_b), .pe_dout (pe_dout), .reg_q (reg_b), .to_reg (up_b), .to_pe (down_b)
  );

  mat_register #(.N(N)) u_reg_a (
    .clk (clk), .rst_n (rst_n), .op (bus_op_a), .from_bus (up_a), .from_host (host_data_a), .q (reg_a)
  );

  mat_register #(.N(N)) u_reg_b (
    .clk (clk), .rst_n (rst_n), .op (bus_op_b), .from_bus (up_b), .from_host (host_data_b), .q (reg_b)
  );

  for (genvar i = 0; i < NPE; i++) begin : g_pe
    pe_cmd_t      cmd;
    logic         active;
    logic [N-1:0] din;

    assign active = (role[i] != ROLE_IDLE);
    assign cmd    = (role[i] == ROLE_CMD1) ? cmd1 : cmd0;
    assign din    = sel_a[i] ? down_a[i] : down_b[i];

    cim_pe #(.M(M), .N(N)) u_pe (
      .clk        (clk),
      .active     (active),
      .cmd        (cmd),
      .shift_mask (shift_mask[i]),
      .din        (din),
      .dout       (pe_dout[i])
    );
  end

  // Register -> PE moves on both buses must not target the same PE.
  always_ff @(posedge clk)
    if (rst_n && bus_op_a == BUS_REG_TO_PE && bus_op_b == BUS_REG_TO_PE)
      assert (addr_a != addr_b) else $error("cim_mat: buses A and B write the same PE");

endmodule
