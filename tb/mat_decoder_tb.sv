// mat_decoder_tb -- exhaustive test of a mat-level decoder pair at the
// default 16 x 16 mat: for every address, exactly the row line of the upper
// address bits, the column line of the lower bits and the PE p*Q+q are
// raised; with the enable low nothing is.
module mat_decoder_tb;
  localparam int unsigned P = 16, Q = 16;
  logic en;
  logic [7:0] addr;
  logic [P-1:0] row_sel;
  logic [Q-1:0] col_sel;
  logic [P*Q-1:0] pe_sel;
  int checks = 0, failures = 0;

  mat_decoder dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++)
      for (int a = 0; a < P*Q; a++) begin
        en = e[0]; addr = a[7:0];
        #1 checks++;
        if (row_sel !== (e ? P'(1) << (a / Q) : '0) ||
            col_sel !== (e ? Q'(1) << (a % Q) : '0) ||
            pe_sel  !== (e ? (P*Q)'(1) << a : '0)) begin
          failures++;
          $display("FAIL en=%0d addr=%0d row=%h col=%h pe=%h", e, a, row_sel, col_sel, pe_sel);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
