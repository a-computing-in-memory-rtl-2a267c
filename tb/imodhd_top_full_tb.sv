// imodhd_top_full_tb -- one complete permutation on the full-size mat
// (16 x 16 PEs of 1024 x 1024 cells, all parameters at their defaults).
// A 4096-bit hypervector is written into row 0 of PEs 4..7 through
// registers A and B, with the masks for a rotation by 5 in rows 1 and 2.
// The sequencer rotates it; the result in the output row of each PE and the
// cycle count are compared with values computed here, and row 0 must be
// unchanged. Then the rotated and original slices are added in all four PEs
// in one cycle (the bundling step of encoding) and the sums checked.
module imodhd_top_full_tb;
  import imodhd_pkg::*;
  localparam int unsigned P = 16, Q = 16, N = 1024, NPE = P*Q, L = 4, D = L*N, BASE = 4, SH = 5;
  localparam int unsigned RI = 0, RLO = 1, RHI = 2, SP1 = 3, SP2 = 4, SP3 = 5, ROUT = 6, RSUM = 7;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n;
  pe_cmd_t host_cmd0, host_cmd1;
  pe_role_e host_role [NPE];
  shift_mask_t host_shift_mask [NPE];
  logic [7:0] host_addr_a, host_addr_b, perm_base;
  bus_op_e host_bus_op_a, host_bus_op_b;
  logic [N-1:0] host_data_a, host_data_b, reg_a, reg_b;
  logic perm_start, perm_busy, perm_done;
  logic [8:0] perm_len;
  logic [9:0] perm_shift;
  perm_rows_t perm_rows;
  int checks = 0, failures = 0;
  logic [D-1:0] hv, rot;

  imodhd_top dut (.*);

  task automatic idle();
    host_cmd0 = '0; host_cmd1 = '0; host_bus_op_a = BUS_IDLE; host_bus_op_b = BUS_IDLE;
    host_addr_a = 0; host_addr_b = 0;
    for (int i = 0; i < NPE; i++) begin host_role[i] = ROLE_IDLE; host_shift_mask[i] = '0; end
  endtask

  function automatic logic [N-1:0] rnd_row();
    logic [N-1:0] v;
    for (int w = 0; w < N/32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  task automatic write2(int pe, int row, logic [N-1:0] va, logic [N-1:0] vb);
    @(negedge clk); idle();
    host_bus_op_a = BUS_HOST_TO_REG; host_data_a = va;
    host_bus_op_b = BUS_HOST_TO_REG; host_data_b = vb;
    @(negedge clk); idle();
    host_bus_op_a = BUS_REG_TO_PE; host_addr_a = 8'(pe);
    host_bus_op_b = BUS_REG_TO_PE; host_addr_b = 8'(pe + 1);
    host_cmd0.wr = WR_DATA; host_cmd0.row_w = ROW_AW'(row);
    host_role[pe] = ROLE_CMD0; host_role[pe+1] = ROLE_CMD0;
    @(negedge clk); idle();
  endtask

  task automatic check2(string what, int pe, int row, logic [N-1:0] ea, logic [N-1:0] eb);
    @(negedge clk); idle();
    host_bus_op_a = BUS_PE_TO_REG; host_addr_a = 8'(pe);
    host_bus_op_b = BUS_PE_TO_REG; host_addr_b = 8'(pe + 1);
    host_cmd0.op = CSA_READ; host_cmd0.row_x = ROW_AW'(row);
    host_role[pe] = ROLE_CMD0; host_role[pe+1] = ROLE_CMD0;
    @(negedge clk); idle();
    checks += 2;
    if (reg_a !== ea) begin failures++; $display("FAIL %s PE %0d", what, pe); end
    if (reg_b !== eb) begin failures++; $display("FAIL %s PE %0d", what, pe + 1); end
  endtask

  function automatic logic [N-1:0] slice(logic [D-1:0] v, int k);
    return v[(L-1-k)*N +: N];
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles, exp_cycles, s;
    idle(); host_data_a = 0; host_data_b = 0; perm_start = 0; perm_base = 0; perm_len = 0;
    perm_shift = 0; perm_rows = '0; rst_n = 0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    for (int k = 0; k < L; k++) hv[(L-1-k)*N +: N] = rnd_row();
    for (int j = 0; j < D; j++) rot[j] = hv[(j + SH) % D];
    for (int k = 0; k < L; k += 2) begin
      write2(BASE + k, RI, slice(hv, k), slice(hv, k + 1));
      write2(BASE + k, RLO, N'((1 << SH) - 1), N'((1 << SH) - 1));
      write2(BASE + k, RHI, ~N'((1 << SH) - 1), ~N'((1 << SH) - 1));
    end
    @(negedge clk);
    perm_base = BASE; perm_len = L; perm_shift = SH;
    perm_rows = '{row_i: RI, row_mask_lo: RLO, row_mask_hi: RHI, row_sp1: SP1, row_sp2: SP2,
                  row_sp3: SP3, row_out: ROUT, copy_out: 1'b1};
    perm_start = 1;
    @(posedge clk); #1 perm_start = 0;
    cycles = 0;
    do begin @(posedge clk); cycles++; #1; end while (!perm_done);
    s = (N - SH + 2) / 3;
    exp_cycles = 2 * (s + 2 * ((L + 3) / 4) + 1) + 1 + 1;
    checks++;
    if (cycles != exp_cycles) begin failures++; $display("FAIL cycles %0d exp %0d", cycles, exp_cycles); end
    $display("permutation of %0d bits by %0d took %0d cycles", D, SH, cycles);
    for (int k = 0; k < L; k += 2) begin
      check2("rotated", BASE + k, ROUT, slice(rot, k), slice(rot, k + 1));
      check2("row i intact", BASE + k, RI, slice(hv, k), slice(hv, k + 1));
    end
    // bundling step: original + rotated, all four PEs in one cycle
    @(negedge clk); idle();
    host_cmd0 = '{op: CSA_ADD, cin: 1'b0, wr: WR_COPY, row_x: RI, row_y: ROUT, row_w: RSUM};
    for (int k = 0; k < L; k++) host_role[BASE + k] = ROLE_CMD0;
    @(negedge clk); idle();
    for (int k = 0; k < L; k += 2)
      check2("sum", BASE + k, RSUM, slice(hv, k) + slice(rot, k), slice(hv, k + 1) + slice(rot, k + 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
