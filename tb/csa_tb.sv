// csa_tb -- self-checking test of the customized sense amplifier.
// Bitline values are produced from two random 64-bit rows the way the array
// senses them (one row: bl = X, blb = ~X; two rows: bl = X & Y,
// blb = ~X & ~Y). Every operation is compared with plain SystemVerilog
// operators; ADD is compared with a 65-bit sum including carry-in and carry
// out, and subtraction is checked as ~Y written back, then X + ~Y + 1.
module csa_tb;
  import imodhd_pkg::*;
  localparam int unsigned N = 64;
  csa_op_e op;
  logic cin, cout;
  logic [N-1:0] bl, blb, result;
  int checks = 0, failures = 0;

  csa #(.N(N)) dut (.*);

  task automatic check(string what, logic [N:0] got, logic [N:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] x, y, nx;
    logic [N:0] s;
    for (int t = 0; t < 500; t++) begin
      x = {$urandom, $urandom}; y = {$urandom, $urandom};
      if (t == 0) begin x = '1; y = 1; end
      cin = 0;
      op = CSA_READ; bl = x; blb = ~x; #1 check("READ", {1'b0, result}, {1'b0, x});
      op = CSA_NOT;  #1 check("NOT", {1'b0, result}, {1'b0, ~x});
      bl = x & y; blb = ~x & ~y;
      op = CSA_AND; #1 check("AND", {1'b0, result}, {1'b0, x & y});
      op = CSA_OR;  #1 check("OR",  {1'b0, result}, {1'b0, x | y});
      op = CSA_XOR; #1 check("XOR", {1'b0, result}, {1'b0, x ^ y});
      op = CSA_ADD; cin = t[0];
      s = {1'b0, x} + {1'b0, y} + (N+1)'(cin);
      #1 check("ADD", {cout, result}, s);
      // subtraction: NOT y, then add with carry-in 1
      op = CSA_NOT; bl = y; blb = ~y; #1 nx = result;
      op = CSA_ADD; cin = 1; bl = x & nx; blb = ~x & ~nx;
      #1 check("SUB", {1'b0, result}, {1'b0, x - y});
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
