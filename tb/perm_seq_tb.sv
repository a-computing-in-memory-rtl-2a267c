// perm_seq_tb -- self-checking test of the permutation sequencer driving a
// small mat (2 x 4 PEs of 8 x 8 cells).
// For groups of 2, 4, 6 and 8 PEs at different base PEs and every rotation
// 0..7, a random hypervector is written into row i of the group together
// with the low/high masks for m, the sequencer is started, and afterwards
// spare row j and the output row of every PE must hold the hypervector
// rotated right by m (bit j of the result = bit (j+m) mod D of the input),
// row i must be unchanged, and the run must take the number of cycles given
// in the sequencer's header. The first case is the paper's example: four
// PEs, rotation by 2. The mat is driven by the testbench when the sequencer
// is idle.
module perm_seq_tb;
  import imodhd_pkg::*;
  localparam int unsigned P = 2, Q = 4, M = 8, N = 8, NPE = P*Q;
  localparam int unsigned RI = 0, RLO = 1, RHI = 2, SP1 = 3, SP2 = 4, SP3 = 5, ROUT = 6;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done;
  logic [2:0] cfg_base;
  logic [3:0] cfg_len;
  logic [2:0] cfg_shift;
  perm_rows_t cfg_rows;
  pe_cmd_t s_cmd0, s_cmd1, t_cmd0, t_cmd1, m_cmd0, m_cmd1;
  pe_role_e s_role [NPE], t_role [NPE], m_role [NPE];
  shift_mask_t s_mask [NPE], t_mask [NPE], m_mask [NPE];
  logic [2:0] s_addr_a, s_addr_b, t_addr_a, t_addr_b, m_addr_a, m_addr_b;
  bus_op_e s_op_a, s_op_b, t_op_a, t_op_b, m_op_a, m_op_b;
  logic [N-1:0] host_a, host_b, reg_a, reg_b;
  int checks = 0, failures = 0;

  perm_seq #(.P(P), .Q(Q), .N(N)) dut (
    .clk, .rst_n, .start, .cfg_base, .cfg_len, .cfg_shift, .cfg_rows, .busy, .done,
    .cmd0(s_cmd0), .cmd1(s_cmd1), .role(s_role), .shift_mask(s_mask),
    .addr_a(s_addr_a), .bus_op_a(s_op_a), .addr_b(s_addr_b), .bus_op_b(s_op_b));

  always_comb begin
    m_cmd0 = busy ? s_cmd0 : t_cmd0;  m_cmd1 = busy ? s_cmd1 : t_cmd1;
    m_role = busy ? s_role : t_role;  m_mask = busy ? s_mask : t_mask;
    m_addr_a = busy ? s_addr_a : t_addr_a;  m_op_a = busy ? s_op_a : t_op_a;
    m_addr_b = busy ? s_addr_b : t_addr_b;  m_op_b = busy ? s_op_b : t_op_b;
  end

  cim_mat #(.P(P), .Q(Q), .M(M), .N(N)) u_mat (
    .clk, .rst_n, .cmd0(m_cmd0), .cmd1(m_cmd1), .role(m_role), .shift_mask(m_mask),
    .addr_a(m_addr_a), .bus_op_a(m_op_a), .host_data_a(host_a),
    .addr_b(m_addr_b), .bus_op_b(m_op_b), .host_data_b(host_b), .reg_a, .reg_b);

  task automatic idle();
    t_cmd0 = '0; t_cmd1 = '0; t_op_a = BUS_IDLE; t_op_b = BUS_IDLE; t_addr_a = 0; t_addr_b = 0;
    for (int i = 0; i < NPE; i++) begin t_role[i] = ROLE_IDLE; t_mask[i] = '0; end
  endtask

  task automatic write_row(int pe, int row, logic [N-1:0] v);
    @(negedge clk); idle(); t_op_a = BUS_HOST_TO_REG; host_a = v;
    @(negedge clk); idle(); t_op_a = BUS_REG_TO_PE; t_addr_a = 3'(pe);
    t_cmd0.wr = WR_DATA; t_cmd0.row_w = ROW_AW'(row); t_role[pe] = ROLE_CMD0;
    @(negedge clk); idle();
  endtask

  task automatic read_row(int pe, int row, output logic [N-1:0] v);
    @(negedge clk); idle(); t_op_a = BUS_PE_TO_REG; t_addr_a = 3'(pe);
    t_cmd0.op = CSA_READ; t_cmd0.row_x = ROW_AW'(row); t_role[pe] = ROLE_CMD0;
    @(negedge clk); idle(); v = reg_a;
  endtask

  task automatic check(string what, logic [N-1:0] got, logic [N-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  task automatic run_case(int base, int len, int m);
    logic [63:0] hv, rot;
    logic [N-1:0] v;
    int d, cycles, exp_cycles, s;
    d = len * N;
    hv = {$urandom, $urandom};
    for (int j = 0; j < 64; j++) rot[j] = (j < d) ? hv[(j + m) % d] : 1'b0;
    for (int k = 0; k < len; k++) begin
      write_row(base + k, RI, hv[(len-1-k)*N +: N]);
      write_row(base + k, RLO, N'((1 << m) - 1));
      write_row(base + k, RHI, ~N'((1 << m) - 1));
    end
    @(negedge clk);
    cfg_base = 3'(base); cfg_len = 4'(len); cfg_shift = 3'(m);
    cfg_rows = '{row_i: RI, row_mask_lo: RLO, row_mask_hi: RHI, row_sp1: SP1, row_sp2: SP2,
                 row_sp3: SP3, row_out: ROUT, copy_out: 1'b1};
    start = 1;
    @(posedge clk); #1 start = 0;
    cycles = 0;
    do begin @(posedge clk); cycles++; #1; end while (!done);
    s = (N - m + 2) / 3;
    if ((m + 2) / 3 > s) s = (m + 2) / 3;
    if (s < 1) s = 1;
    exp_cycles = 2 * (s + 2 * ((len + 3) / 4) + 1) + 1 + 1;
    checks++;
    if (cycles != exp_cycles) begin
      failures++; $display("FAIL cycles base=%0d L=%0d m=%0d: %0d exp %0d", base, len, m, cycles, exp_cycles);
    end
    for (int k = 0; k < len; k++) begin
      read_row(base + k, SP3, v);
      check($sformatf("rowj base=%0d L=%0d m=%0d pe+%0d", base, len, m, k), v, rot[(len-1-k)*N +: N]);
      read_row(base + k, ROUT, v);
      check($sformatf("out base=%0d L=%0d m=%0d pe+%0d", base, len, m, k), v, rot[(len-1-k)*N +: N]);
      read_row(base + k, RI, v);
      check($sformatf("row i intact pe+%0d", k), v, hv[(len-1-k)*N +: N]);
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle(); host_a = 0; host_b = 0; start = 0; cfg_base = 0; cfg_len = 0; cfg_shift = 0;
    cfg_rows = '0; rst_n = 0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    run_case(0, 4, 2);                      // the paper's example layout
    for (int m = 0; m < N; m++) run_case(0, 4, m);
    for (int m = 0; m < N; m++) run_case(2, 6, m);
    run_case(6, 2, 5);
    run_case(0, 8, 7);
    run_case(1, 6, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
