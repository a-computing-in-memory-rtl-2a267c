// log_shifter_tb -- self-checking test of the logarithmic shifter.
// Every direction and amount 0..3 on random 48-bit words, compared with the
// << and >> operators (zero fill), including right shift as division by
// 2^amount rounded down.
module log_shifter_tb;
  import imodhd_pkg::*;
  localparam int unsigned N = 48;
  shift_mask_t mask;
  logic [N-1:0] din, dout;
  int checks = 0, failures = 0;

  log_shifter #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [N-1:0] exp;
    for (int t = 0; t < 300; t++) begin
      din = {$urandom, $urandom};
      for (int d = 0; d < 2; d++)
        for (int a = 0; a < 4; a++) begin
          mask = '{left: d[0], amt: a[1:0]};
          exp  = d[0] ? din << a : din / (N'(1) << a);
          #1 checks++;
          if (dout !== exp) begin
            failures++;
            $display("FAIL left=%0d amt=%0d din=%h got %h exp %h", d, a, din, dout, exp);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
