// mat_register_tb -- self-checking test of a mat-level register: reset to
// zero, capture from the bus, capture from outside, hold on idle and on the
// register -> PE move, against a reference value kept in the testbench.
module mat_register_tb;
  import imodhd_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n;
  bus_op_e op;
  logic [N-1:0] from_bus, from_host, q, exp;
  int checks = 0, failures = 0;

  mat_register #(.N(N)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; op = BUS_IDLE; from_bus = '1; from_host = '1;
    @(posedge clk); #1 rst_n = 1; exp = '0;
    checks++; if (q !== '0) begin failures++; $display("FAIL reset"); end
    for (int t = 0; t < 400; t++) begin
      @(negedge clk);
      op = bus_op_e'($urandom_range(3)); from_bus = $urandom; from_host = $urandom;
      @(posedge clk);
      if (op == BUS_PE_TO_REG) exp = from_bus;
      if (op == BUS_HOST_TO_REG) exp = from_host;
      #1 checks++;
      if (q !== exp) begin failures++; $display("FAIL op=%0d q=%h exp=%h", op, q, exp); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
