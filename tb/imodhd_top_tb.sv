// imodhd_top_tb -- end-to-end test of IM-ODHD on a reduced mat (2 x 4 PEs of
// 16 x 16 cells, hypervectors of D = 64 bits spread over 4 PEs).
// It runs a miniature of the outlier-detection data flow on the mat:
//   - two seed hypervectors and the rotation masks are loaded from outside,
//     two PEs per cycle over buses A and B;
//   - a 2-feature sample is encoded as rho^0(s1) + rho^1(s2) (+ a second
//     sample with rotation 5): the sequencer rotates the seed, then the
//     rotated and the unrotated slices are added row-wise in every PE at
//     once;
//   - the encoded rows are bound with a query (XOR = pointwise product),
//     subtracted (NOT, local write, add with carry-in 1) and divided by 4
//     (right shift by 2);
//   - a host write attempted while the sequencer is busy must be ignored.
// Every result is read back through the registers and compared with a
// model computed in the testbench. The mechanisms (dual-bus moves, two
// command groups in one cycle, multi-step shifts, register -> PE moves,
// carry-in subtraction, shift division, host blocking) are counted and each
// must have happened at least once.
module imodhd_top_tb;
  import imodhd_pkg::*;
  localparam int unsigned P = 2, Q = 4, M = 16, N = 16, NPE = P*Q, L = 4, D = L*N;
  localparam int unsigned RS1 = 0, RS2 = 1, RLO = 2, RHI = 3, SP1 = 4, SP2 = 5, SP3 = 6,
                          RROT = 7, RENC = 8, RQRY = 9, RBND = 10, RNEG = 11, RSUB = 12, RDIV = 13;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n;
  pe_cmd_t host_cmd0, host_cmd1;
  pe_role_e host_role [NPE];
  shift_mask_t host_shift_mask [NPE];
  logic [2:0] host_addr_a, host_addr_b, perm_base;
  bus_op_e host_bus_op_a, host_bus_op_b;
  logic [N-1:0] host_data_a, host_data_b, reg_a, reg_b;
  logic perm_start, perm_busy, perm_done;
  logic [3:0] perm_len;
  logic [3:0] perm_shift;
  perm_rows_t perm_rows;
  int checks = 0, failures = 0;
  int n_dual_up = 0, n_dual_down = 0, n_two_groups = 0, n_multistep = 0, n_perm = 0,
      n_sub = 0, n_div = 0, n_blocked = 0;
  logic [N-1:0] model [NPE][M];

  imodhd_top #(.P(P), .Q(Q), .M(M), .N(N)) dut (.*);

  // mechanism counters, sampled on the mat's inputs
  always @(posedge clk) if (rst_n) begin
    if (dut.mat_op_a == BUS_PE_TO_REG && dut.mat_op_b == BUS_PE_TO_REG) n_dual_up++;
    if (dut.mat_op_a == BUS_REG_TO_PE && dut.mat_op_b == BUS_REG_TO_PE) n_dual_down++;
    if (perm_busy && dut.mat_cmd0.op == CSA_READ && dut.mat_cmd0.wr == WR_COPY &&
        dut.mat_cmd0.row_w == ROW_AW'(SP1)) n_multistep++;
    if (perm_done) n_perm++;
  end

  task automatic idle();
    host_cmd0 = '0; host_cmd1 = '0; host_bus_op_a = BUS_IDLE; host_bus_op_b = BUS_IDLE;
    host_addr_a = 0; host_addr_b = 0;
    for (int i = 0; i < NPE; i++) begin host_role[i] = ROLE_IDLE; host_shift_mask[i] = '0; end
  endtask

  task automatic check(string what, logic [N-1:0] got, logic [N-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  // write two rows in two PEs at once (bus A -> pe, bus B -> pe+1)
  task automatic write2(int pe, int row, logic [N-1:0] va, logic [N-1:0] vb);
    @(negedge clk); idle();
    host_bus_op_a = BUS_HOST_TO_REG; host_data_a = va;
    host_bus_op_b = BUS_HOST_TO_REG; host_data_b = vb;
    @(negedge clk); idle();
    host_bus_op_a = BUS_REG_TO_PE; host_addr_a = 3'(pe);
    host_bus_op_b = BUS_REG_TO_PE; host_addr_b = 3'(pe + 1);
    host_cmd0.wr = WR_DATA; host_cmd0.row_w = ROW_AW'(row);
    host_role[pe] = ROLE_CMD0; host_role[pe+1] = ROLE_CMD0;
    model[pe][row] = va; model[pe+1][row] = vb;
    @(negedge clk); idle();
  endtask

  // read the same row of two PEs at once and compare
  task automatic check2(string what, int pe, int row);
    @(negedge clk); idle();
    host_bus_op_a = BUS_PE_TO_REG; host_addr_a = 3'(pe);
    host_bus_op_b = BUS_PE_TO_REG; host_addr_b = 3'(pe + 1);
    host_cmd0.op = CSA_READ; host_cmd0.row_x = ROW_AW'(row);
    host_role[pe] = ROLE_CMD0; host_role[pe+1] = ROLE_CMD0;
    @(negedge clk); idle();
    check($sformatf("%s pe%0d", what, pe), reg_a, model[pe][row]);
    check($sformatf("%s pe%0d", what, pe + 1), reg_b, model[pe+1][row]);
  endtask

  // one command on all PEs of the group, result modelled by f
  task automatic all_pe(pe_cmd_t c, shift_mask_t sm);
    @(negedge clk); idle();
    host_cmd0 = c;
    for (int i = 0; i < L; i++) begin
      logic [N-1:0] x, y, r;
      host_role[i] = ROLE_CMD0; host_shift_mask[i] = sm;
      x = model[i][c.row_x[3:0]]; y = model[i][c.row_y[3:0]];
      case (c.op)
        CSA_READ: r = x;
        CSA_NOT:  r = ~x;
        CSA_AND:  r = x & y;
        CSA_OR:   r = x | y;
        CSA_XOR:  r = x ^ y;
        default:  r = x + y + N'(c.cin);
      endcase
      r = sm.left ? r << sm.amt : r >> sm.amt;
      if (c.wr == WR_COPY) model[i][c.row_w[3:0]] = r;
    end
    @(negedge clk); idle();
  endtask

  task automatic permute(int row_src, int m, int row_dst);
    logic [D-1:0] hv, rot;
    for (int k = 0; k < L; k++) hv[(L-1-k)*N +: N] = model[k][row_src];
    for (int j = 0; j < D; j++) rot[j] = hv[(j + m) % D];
    for (int k = 0; k < L; k += 2) begin
      write2(k, RLO, N'((1 << m) - 1), N'((1 << m) - 1));
      write2(k, RHI, ~N'((1 << m) - 1), ~N'((1 << m) - 1));
    end
    @(negedge clk);
    perm_base = 0; perm_len = 4'(L); perm_shift = 4'(m);
    perm_rows = '{row_i: ROW_AW'(row_src), row_mask_lo: RLO, row_mask_hi: RHI, row_sp1: SP1,
                  row_sp2: SP2, row_sp3: SP3, row_out: ROW_AW'(row_dst), copy_out: 1'b1};
    perm_start = 1;
    @(negedge clk); perm_start = 0;
    // a host write while the sequencer owns the mat must be ignored
    host_bus_op_a = BUS_HOST_TO_REG; host_data_a = 16'hdead;
    @(negedge clk);
    host_bus_op_a = BUS_REG_TO_PE; host_addr_a = 3'(L); host_cmd0.wr = WR_DATA;
    host_cmd0.row_w = ROW_AW'(RS1); host_role[L] = ROLE_CMD0;
    if (perm_busy) n_blocked++;
    @(negedge clk); idle();
    wait (perm_done);
    @(negedge clk);
    for (int k = 0; k < L; k++) model[k][row_dst] = rot[(L-1-k)*N +: N];
    for (int k = 0; k < L; k++) model[k][SP3] = rot[(L-1-k)*N +: N];
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle(); host_data_a = 0; host_data_b = 0; perm_start = 0; perm_base = 0; perm_len = 0;
    perm_shift = 0; perm_rows = '0; rst_n = 0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    // seed hypervectors s1 and s2, a query, and a PE outside the group
    for (int k = 0; k < NPE; k += 2) begin
      write2(k, RS1, $urandom, $urandom);
      write2(k, RS2, $urandom, $urandom);
      write2(k, RQRY, $urandom, $urandom);
    end
    // encode sample 1: rho^0(s1) + rho^1(s2)
    permute(RS2, 1, RROT);
    for (int k = 0; k < L; k += 2) check2("rho1(s2)", k, RROT);
    all_pe('{op: CSA_ADD, cin: 1'b0, wr: WR_COPY, row_x: RS1, row_y: RROT, row_w: RENC}, '0);
    for (int k = 0; k < L; k += 2) check2("encode 1", k, RENC);
    // encode sample 2: rho^0(s1) + rho^5(s2), rotation needs multi-step shifts
    permute(RS2, 5, RROT);
    for (int k = 0; k < L; k += 2) check2("rho5(s2)", k, RROT);
    all_pe('{op: CSA_ADD, cin: 1'b0, wr: WR_COPY, row_x: RS1, row_y: RROT, row_w: RENC}, '0);
    for (int k = 0; k < L; k += 2) check2("encode 2", k, RENC);
    // PE outside the group kept its row despite the blocked host write
    check2("blocked write", L, RS1);
    // binding with the query
    all_pe('{op: CSA_XOR, cin: 1'b0, wr: WR_COPY, row_x: RENC, row_y: RQRY, row_w: RBND}, '0);
    for (int k = 0; k < L; k += 2) check2("bind", k, RBND);
    // subtraction RENC - RQRY: NOT, local write, add with carry-in 1
    all_pe('{op: CSA_NOT, cin: 1'b0, wr: WR_COPY, row_x: RQRY, row_y: RQRY, row_w: RNEG}, '0);
    all_pe('{op: CSA_ADD, cin: 1'b1, wr: WR_COPY, row_x: RENC, row_y: RNEG, row_w: RSUB}, '0);
    for (int k = 0; k < L; k++) begin
      checks++;
      if (model[k][RSUB] !== model[k][RENC] - model[k][RQRY]) begin
        failures++; $display("FAIL model subtraction pe%0d", k);
      end
    end
    for (int k = 0; k < L; k += 2) check2("subtract", k, RSUB);
    n_sub++;
    // division by 4
    all_pe('{op: CSA_READ, cin: 1'b0, wr: WR_COPY, row_x: RSUB, row_y: RSUB, row_w: RDIV},
           '{left: 1'b0, amt: 2'd2});
    for (int k = 0; k < L; k += 2) check2("divide", k, RDIV);
    n_div++;
    // two command groups in one cycle: even PEs AND, odd PEs OR
    @(negedge clk); idle();
    host_cmd0 = '{op: CSA_AND, cin: 1'b0, wr: WR_COPY, row_x: RS1, row_y: RS2, row_w: RBND};
    host_cmd1 = '{op: CSA_OR,  cin: 1'b0, wr: WR_COPY, row_x: RS1, row_y: RS2, row_w: RBND};
    for (int i = 0; i < L; i++) begin
      host_role[i] = (i % 2 == 0) ? ROLE_CMD0 : ROLE_CMD1;
      model[i][RBND] = (i % 2 == 0) ? model[i][RS1] & model[i][RS2] : model[i][RS1] | model[i][RS2];
    end
    n_two_groups++;
    @(negedge clk); idle();
    for (int k = 0; k < L; k += 2) check2("two groups", k, RBND);

    $display("mechanisms: dual_up=%0d dual_down=%0d two_groups=%0d multistep=%0d perm=%0d sub=%0d div=%0d blocked=%0d",
             n_dual_up, n_dual_down, n_two_groups, n_multistep, n_perm, n_sub, n_div, n_blocked);
    if (n_dual_up == 0)    begin failures++; $display("FAIL no dual PE->register move"); end
    if (n_dual_down == 0)  begin failures++; $display("FAIL no dual register->PE move"); end
    if (n_two_groups == 0) begin failures++; $display("FAIL no two-group cycle"); end
    if (n_multistep == 0)  begin failures++; $display("FAIL no multi-step shift"); end
    if (n_perm != 2)       begin failures++; $display("FAIL permutations %0d", n_perm); end
    if (n_blocked == 0)    begin failures++; $display("FAIL host blocking not exercised"); end
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
