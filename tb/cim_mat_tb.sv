// cim_mat_tb -- self-checking test of the mat (2 x 4 PEs of 16 x 16 cells).
// 1. Rows of every PE are loaded from outside: registers A and B are filled
//    from the host ports and written into two different PEs in one cycle.
// 2. Two PE groups run different commands in the same cycle (cmd0: XOR with
//    per-PE shift masks, cmd1: ADD), writing results back locally.
// 3. Every row of every PE is read out through both buses at once (PE ->
//    register) and compared with a reference model of the whole mat.
module cim_mat_tb;
  import imodhd_pkg::*;
  localparam int unsigned P = 2, Q = 4, M = 16, N = 16, NPE = P*Q;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n;
  pe_cmd_t cmd0, cmd1;
  pe_role_e role [NPE];
  shift_mask_t shift_mask [NPE];
  logic [2:0] addr_a, addr_b;
  bus_op_e bus_op_a, bus_op_b;
  logic [N-1:0] host_data_a, host_data_b, reg_a, reg_b;
  logic [N-1:0] ref_mem [NPE][M];
  int checks = 0, failures = 0;

  cim_mat #(.P(P), .Q(Q), .M(M), .N(N)) dut (.*);

  task automatic idle();
    cmd0 = '0; cmd1 = '0; bus_op_a = BUS_IDLE; bus_op_b = BUS_IDLE;
    addr_a = 0; addr_b = 0;
    for (int i = 0; i < NPE; i++) begin role[i] = ROLE_IDLE; shift_mask[i] = '0; end
  endtask

  task automatic check(string what, logic [N-1:0] got, logic [N-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    idle(); host_data_a = 0; host_data_b = 0; rst_n = 0;
    @(negedge clk); rst_n = 1;
    // 1. load rows 0..3 of every PE, two PEs per step
    for (int r = 0; r < 4; r++)
      for (int pe = 0; pe < NPE; pe += 2) begin
        @(negedge clk); idle();
        bus_op_a = BUS_HOST_TO_REG; bus_op_b = BUS_HOST_TO_REG;
        host_data_a = $urandom; host_data_b = $urandom;
        ref_mem[pe][r] = host_data_a; ref_mem[pe+1][r] = host_data_b;
        @(negedge clk); idle();
        bus_op_a = BUS_REG_TO_PE; addr_a = 3'(pe);
        bus_op_b = BUS_REG_TO_PE; addr_b = 3'(pe + 1);
        cmd0.wr = WR_DATA; cmd0.row_w = ROW_AW'(r);
        role[pe] = ROLE_CMD0; role[pe+1] = ROLE_CMD0;
      end
    // 2. two command groups at once
    @(negedge clk); idle();
    cmd0 = '{op: CSA_XOR, cin: 1'b0, wr: WR_COPY, row_x: 0, row_y: 1, row_w: 5};
    cmd1 = '{op: CSA_ADD, cin: 1'b1, wr: WR_COPY, row_x: 2, row_y: 3, row_w: 6};
    for (int i = 0; i < NPE; i++) begin
      logic [N-1:0] r;
      role[i] = (i % 2 == 0) ? ROLE_CMD0 : ROLE_CMD1;
      shift_mask[i] = shift_mask_t'(i);
      r = (i % 2 == 0) ? ref_mem[i][0] ^ ref_mem[i][1] : ref_mem[i][2] + ref_mem[i][3] + 1;
      r = shift_mask[i].left ? r << shift_mask[i].amt : r >> shift_mask[i].amt;
      if (i % 2 == 0) ref_mem[i][5] = r; else ref_mem[i][6] = r;
    end
    // 3. read rows 0..3, 5 and 6 of every PE over both buses
    for (int r = 0; r < 7; r++) begin
      if (r == 4) continue;
      for (int pe = 0; pe < NPE; pe += 2) begin
        @(negedge clk); idle();
        bus_op_a = BUS_PE_TO_REG; addr_a = 3'(pe + 1);
        bus_op_b = BUS_PE_TO_REG; addr_b = 3'(pe);
        cmd0.op = CSA_READ; cmd0.row_x = ROW_AW'(r);
        cmd1.op = CSA_READ; cmd1.row_x = ROW_AW'(r);
        role[pe] = ROLE_CMD1; role[pe+1] = ROLE_CMD0;
        @(negedge clk); idle();
        if (r != 6) check($sformatf("reg_b pe%0d row%0d", pe, r), reg_b, ref_mem[pe][r]);
        if (r != 5) check($sformatf("reg_a pe%0d row%0d", pe + 1, r), reg_a, ref_mem[pe+1][r]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
