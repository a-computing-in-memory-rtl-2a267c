// cim_pe_tb -- self-checking test of one processing element (16 x 32).
// Rows are written through the write driver, then random commands (any
// operation, random shift mask, optional copy back) are issued; dout and the
// row contents are compared each cycle with a reference model of the PE kept
// in the testbench (array + operation + shift). An inactive PE must write
// nothing.
module cim_pe_tb;
  import imodhd_pkg::*;
  localparam int unsigned M = 16, N = 32;
  logic clk = 0;
  always #5 clk = ~clk;

  logic active;
  pe_cmd_t cmd;
  shift_mask_t shift_mask;
  logic [N-1:0] din, dout;
  logic [N-1:0] ref_mem [M];
  int checks = 0, failures = 0;

  cim_pe #(.M(M), .N(N)) dut (.*);

  function automatic logic [N-1:0] model(pe_cmd_t c, shift_mask_t sm);
    logic [N-1:0] x, y, r;
    x = ref_mem[c.row_x[3:0]]; y = ref_mem[c.row_y[3:0]];
    case (c.op)
      CSA_READ: r = x;
      CSA_NOT:  r = ~x;
      CSA_AND:  r = x & y;
      CSA_OR:   r = x | y;
      CSA_XOR:  r = x ^ y;
      default:  r = x + y + N'(c.cin);
    endcase
    return sm.left ? r << sm.amt : r >> sm.amt;
  endfunction

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
    active = 0; cmd = '0; shift_mask = '0; din = '0;
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      active = 1; cmd = '0; cmd.wr = WR_DATA; cmd.row_w = ROW_AW'(r);
      din = $urandom; ref_mem[r] = din;
    end
    for (int t = 0; t < 600; t++) begin
      logic [N-1:0] exp;
      @(negedge clk);
      active = ($urandom_range(9) != 0);
      cmd.op = csa_op_e'($urandom_range(5));
      cmd.cin = $urandom_range(1);
      cmd.wr = wr_sel_e'($urandom_range(2));
      cmd.row_x = ROW_AW'($urandom_range(M-1));
      cmd.row_y = ROW_AW'($urandom_range(M-1));
      cmd.row_w = ROW_AW'($urandom_range(M-1));
      shift_mask = shift_mask_t'($urandom_range(7));
      din = $urandom;
      exp = model(cmd, shift_mask);
      #1 if (active) check($sformatf("dout op %0d", cmd.op), dout, exp);
      @(posedge clk);
      if (active && cmd.wr == WR_COPY) ref_mem[cmd.row_w[3:0]] = exp;
      if (active && cmd.wr == WR_DATA) ref_mem[cmd.row_w[3:0]] = din;
    end
    // read every row back
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      active = 1; cmd = '0; cmd.op = CSA_READ; cmd.row_x = ROW_AW'(r); shift_mask = '0;
      #1 check("readback", dout, ref_mem[r]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
