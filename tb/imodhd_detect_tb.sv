// imodhd_detect_tb -- the outlier-detection step run on a reduced mat
// (2 x 4 PEs of 32 x 16 cells, hypervectors of D = 64 bits over 4 PEs).
// The testbench acts as the controller. For each query hypervector it:
//   - binds the query with the one-class HV (XOR, one bit per bipolar
//     element, so the dot product is D - 2 * popcount),
//   - counts the ones of the bound row inside every PE at once with
//     in-memory operations only: for s = 1, 2, 4, 8 it computes
//     (x & mask_s) + ((x >> s) & mask_s), where a shift above 3 takes
//     several 0..3-bit steps and the masks are 0x5555, 0x3333, 0x0f0f,
//     0x00ff,
//   - moves the partial counts of PEs 1..3 into PE 0 over bus A and
//     register A, and adds them there,
//   - computes threshold - count by NOT, local write and ADD with carry-in
//     1; the sign bit says whether the query is an outlier.
// The one-class HV is stored here in its binarized form, a choice of this
// test: the integer one-class HV would need a multi-bit element layout.
// Per-PE counts, the total and the decision are compared with values the
// testbench computes with $countones. Inlier-like queries (few bit flips)
// and random queries are both used, and each kind of decision, the
// multi-step shifts and the cross-PE moves must each happen at least once.
module imodhd_detect_tb;
  import imodhd_pkg::*;
  localparam int unsigned P = 2, Q = 4, M = 32, N = 16, NPE = P*Q, L = 4, D = L*N;
  localparam int unsigned RHOC = 0, RQ = 1, RX = 2, RT1 = 3, RT2 = 4, RM1 = 5, RM2 = 6,
                          RM4 = 7, RM8 = 8, RP1 = 9, RP2 = 10, RP3 = 11, RTH = 12,
                          RNEG = 13, RSUB = 14;
  localparam int unsigned THRESH = 12;   // outlier if more than 12 of 64 elements differ
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
  int n_inlier = 0, n_outlier = 0, n_multistep = 0, n_moves = 0;
  logic [D-1:0] hoc;

  imodhd_top #(.P(P), .Q(Q), .M(M), .N(N)) dut (.*);

  task automatic idle();
    host_cmd0 = '0; host_cmd1 = '0; host_bus_op_a = BUS_IDLE; host_bus_op_b = BUS_IDLE;
    host_addr_a = 0; host_addr_b = 0;
    for (int i = 0; i < NPE; i++) begin host_role[i] = ROLE_IDLE; host_shift_mask[i] = '0; end
  endtask

  task automatic check(string what, logic [N-1:0] got, logic [N-1:0] exp);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  // write one row of PEs pe and pe+1 over buses A and B
  task automatic write2(int pe, int row, logic [N-1:0] va, logic [N-1:0] vb);
    @(negedge clk); idle();
    host_bus_op_a = BUS_HOST_TO_REG; host_data_a = va;
    host_bus_op_b = BUS_HOST_TO_REG; host_data_b = vb;
    @(negedge clk); idle();
    host_bus_op_a = BUS_REG_TO_PE; host_addr_a = 3'(pe);
    host_bus_op_b = BUS_REG_TO_PE; host_addr_b = 3'(pe + 1);
    host_cmd0.wr = WR_DATA; host_cmd0.row_w = ROW_AW'(row);
    host_role[pe] = ROLE_CMD0; host_role[pe+1] = ROLE_CMD0;
    @(negedge clk); idle();
  endtask

  // write the same row of every PE of the group with a D-bit value
  task automatic write_hv(int row, logic [D-1:0] hv);
    for (int k = 0; k < L; k += 2)
      write2(k, row, hv[(L-1-k)*N +: N], hv[(L-2-k)*N +: N]);
  endtask

  // read one row of one PE through bus A
  task automatic read1(int pe, int row, output logic [N-1:0] v);
    @(negedge clk); idle();
    host_bus_op_a = BUS_PE_TO_REG; host_addr_a = 3'(pe);
    host_cmd0.op = CSA_READ; host_cmd0.row_x = ROW_AW'(row);
    host_role[pe] = ROLE_CMD0;
    @(negedge clk); idle();
    v = reg_a;
  endtask

  // one command on PEs first..last
  task automatic run(int first, int last, csa_op_e op, logic cin, int rx, int ry, int rw,
                     logic left = 1'b0, int amt = 0);
    @(negedge clk); idle();
    host_cmd0 = '{op: op, cin: cin, wr: WR_COPY, row_x: ROW_AW'(rx), row_y: ROW_AW'(ry),
                  row_w: ROW_AW'(rw)};
    for (int i = first; i <= last; i++) begin
      host_role[i] = ROLE_CMD0; host_shift_mask[i] = '{left: left, amt: 2'(amt)};
    end
    @(negedge clk); idle();
  endtask

  // copy row `row` of PE src into row `dst_row` of PE 0 over bus A
  task automatic move_to_pe0(int src, int row, int dst_row);
    @(negedge clk); idle();
    host_bus_op_a = BUS_PE_TO_REG; host_addr_a = 3'(src);
    host_cmd0.op = CSA_READ; host_cmd0.row_x = ROW_AW'(row); host_role[src] = ROLE_CMD0;
    @(negedge clk); idle();
    host_bus_op_a = BUS_REG_TO_PE; host_addr_a = 3'd0;
    host_cmd0.wr = WR_DATA; host_cmd0.row_w = ROW_AW'(dst_row); host_role[0] = ROLE_CMD0;
    @(negedge clk); idle();
    n_moves++;
  endtask

  task automatic detect(logic [D-1:0] q);
    logic [D-1:0] b;
    logic [N-1:0] v;
    int total, rem;
    bit outlier;
    write_hv(RQ, q);
    run(0, L-1, CSA_XOR, 1'b0, RHOC, RQ, RX);
    // per-PE population count, (x & m) + ((x >> s) & m)
    for (int lvl = 0; lvl < 4; lvl++) begin
      int s, rm;
      s = 1 << lvl;
      rm = RM1 + lvl;
      run(0, L-1, CSA_AND, 1'b0, RX, rm, RT1);
      run(0, L-1, CSA_READ, 1'b0, RX, RX, RT2, 1'b0, s > 3 ? 3 : s);
      rem = s - 3;
      while (rem > 0) begin
        run(0, L-1, CSA_READ, 1'b0, RT2, RT2, RT2, 1'b0, rem > 3 ? 3 : rem);
        rem -= 3;
        n_multistep++;
      end
      run(0, L-1, CSA_AND, 1'b0, RT2, rm, RT2);
      run(0, L-1, CSA_ADD, 1'b0, RT1, RT2, RX);
    end
    b = hoc ^ q;
    for (int k = 0; k < L; k++) begin
      read1(k, RX, v);
      check($sformatf("count pe%0d", k), v, N'($countones(b[(L-1-k)*N +: N])));
    end
    // accumulate in PE 0
    move_to_pe0(1, RX, RP1);
    move_to_pe0(2, RX, RP2);
    move_to_pe0(3, RX, RP3);
    run(0, 0, CSA_ADD, 1'b0, RX, RP1, RX);
    run(0, 0, CSA_ADD, 1'b0, RX, RP2, RX);
    run(0, 0, CSA_ADD, 1'b0, RX, RP3, RX);
    total = $countones(b);
    read1(0, RX, v);
    check("total count", v, N'(total));
    // threshold - count
    run(0, 0, CSA_NOT, 1'b0, RX, RX, RNEG);
    run(0, 0, CSA_ADD, 1'b1, RTH, RNEG, RSUB);
    read1(0, RSUB, v);
    check("threshold - count", v, N'(THRESH) - N'(total));
    outlier = total > THRESH;
    checks++;
    if (v[N-1] !== outlier) begin
      failures++; $display("FAIL decision: count %0d outlier bit %0d", total, v[N-1]);
    end
    if (outlier) n_outlier++; else n_inlier++;
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [D-1:0] q;
    idle(); host_data_a = 0; host_data_b = 0; perm_start = 0; perm_base = 0; perm_len = 0;
    perm_shift = 0; perm_rows = '0; rst_n = 0;
    @(negedge clk); @(negedge clk); rst_n = 1;
    hoc = {$urandom, $urandom};
    write_hv(RHOC, hoc);
    write_hv(RM1, {L{16'h5555}});
    write_hv(RM2, {L{16'h3333}});
    write_hv(RM4, {L{16'h0f0f}});
    write_hv(RM8, {L{16'h00ff}});
    write_hv(RTH, {L{N'(THRESH)}});
    // inlier-like queries: the one-class HV with 0..12 flipped elements
    for (int t = 0; t < 6; t++) begin
      q = hoc;
      for (int f = 0; f < 2 * t + (t == 5 ? 2 : 0); f++) q[$urandom % D] ^= 1'b1;
      detect(q);
    end
    // unrelated queries
    for (int t = 0; t < 6; t++) detect({$urandom, $urandom});
    // a query exactly at the threshold
    q = hoc;
    for (int f = 0; f < THRESH; f++) q[f * 5] ^= 1'b1;
    detect(q);
    $display("inliers %0d outliers %0d multi-step shifts %0d cross-PE moves %0d",
             n_inlier, n_outlier, n_multistep, n_moves);
    checks++; if (n_inlier == 0)   begin failures++; $display("FAIL no inlier decision"); end
    checks++; if (n_outlier == 0)  begin failures++; $display("FAIL no outlier decision"); end
    checks++; if (n_multistep == 0) begin failures++; $display("FAIL no multi-step shift"); end
    checks++; if (n_moves == 0)    begin failures++; $display("FAIL no cross-PE move"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
