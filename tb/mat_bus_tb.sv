// mat_bus_tb -- self-checking test of a mat-level bus (2 x 4 PEs, 16 bits).
// With each PE selected in turn, the bus must carry exactly that PE's output
// to the register and the register value to that PE only (zero elsewhere);
// with no PE selected the bus is zero.
module mat_bus_tb;
  localparam int unsigned P = 2, Q = 4, N = 16;
  logic [P*Q-1:0] pe_sel;
  logic [N-1:0] pe_dout [P*Q];
  logic [N-1:0] reg_q, to_reg;
  logic [N-1:0] to_pe [P*Q];
  int checks = 0, failures = 0;

  mat_bus #(.P(P), .Q(Q), .N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 50; t++)
      for (int s = -1; s < int'(P*Q); s++) begin
        for (int i = 0; i < P*Q; i++) pe_dout[i] = $urandom;
        reg_q = $urandom;
        pe_sel = (s < 0) ? '0 : (P*Q)'(1) << s;
        #1 checks++;
        if (to_reg !== ((s < 0) ? '0 : pe_dout[s])) begin
          failures++; $display("FAIL to_reg sel=%0d", s);
        end
        for (int i = 0; i < P*Q; i++) begin
          checks++;
          if (to_pe[i] !== ((i == s) ? reg_q : '0)) begin
            failures++; $display("FAIL to_pe[%0d] sel=%0d", i, s);
          end
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
