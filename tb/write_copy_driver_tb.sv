// write_copy_driver_tb -- self-checking test of the write/copy driver select.
// For every activity and select value with random data: write enable only
// for an active PE with a copy or data select, and the written value is the
// shifter output (copy) or the bus data (write driver).
module write_copy_driver_tb;
  import imodhd_pkg::*;
  localparam int unsigned N = 16;
  logic active, we;
  wr_sel_e sel;
  logic [N-1:0] data_in, copy_in, wdata;
  int checks = 0, failures = 0;

  write_copy_driver #(.N(N)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 100; t++)
      for (int a = 0; a < 2; a++)
        for (int s = 0; s < 3; s++) begin
          logic exp_we;
          active = a[0]; sel = wr_sel_e'(s[1:0]);
          data_in = $urandom; copy_in = $urandom;
          exp_we = a[0] && s != 0;
          #1 checks++;
          if (we !== exp_we) begin failures++; $display("FAIL we a=%0d s=%0d", a, s); end
          if (exp_we) begin
            checks++;
            if (wdata !== (s == 2 ? data_in : copy_in)) begin
              failures++; $display("FAIL wdata a=%0d s=%0d", a, s);
            end
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
