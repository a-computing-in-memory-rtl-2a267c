// sram_array_tb -- self-checking test of the PE cell array.
// Fills a 16 x 32 array with random rows, then checks single-row sensing
// (bl = row, blb = ~row), double sensing (bl = AND, blb = NOR of the two
// rows), idle bitlines (all ones) and a read of a row in the same cycle it
// is overwritten (old value seen, new value after the edge) against a
// reference copy kept in the testbench.
module sram_array_tb;
  localparam int unsigned M = 16, N = 32;
  logic clk = 0;
  always #5 clk = ~clk;

  logic wl_x_en, wl_y_en, we;
  logic [$clog2(M)-1:0] wl_x_row, wl_y_row, wrow;
  logic [N-1:0] bl, blb, wdata;
  logic [N-1:0] ref_mem [M];
  int checks = 0, failures = 0;

  sram_array #(.M(M), .N(N)) dut (.*);

  task automatic check(string what, logic [N-1:0] got, logic [N-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wl_x_en = 0; wl_y_en = 0; we = 0; wl_x_row = 0; wl_y_row = 0; wrow = 0; wdata = 0;
    for (int r = 0; r < M; r++) begin
      @(negedge clk);
      we = 1; wrow = r[$clog2(M)-1:0]; wdata = $urandom; ref_mem[r] = wdata;
    end
    @(negedge clk); we = 0;
    #1 check("idle bl", bl, '1);
    check("idle blb", blb, '1);
    for (int t = 0; t < 200; t++) begin
      int x, y;
      x = $urandom_range(M-1); y = $urandom_range(M-1);
      @(negedge clk);
      wl_x_en = 1; wl_x_row = x[$clog2(M)-1:0]; wl_y_en = 0; wl_y_row = y[$clog2(M)-1:0];
      #1 check("single bl", bl, ref_mem[x]);
      check("single blb", blb, ~ref_mem[x]);
      wl_y_en = 1;
      #1 check("double bl", bl, ref_mem[x] & ref_mem[y]);
      check("double blb", blb, ~ref_mem[x] & ~ref_mem[y]);
      // read row x while overwriting it
      we = 1; wrow = x[$clog2(M)-1:0]; wdata = $urandom; wl_y_en = 0;
      #1 check("read during write", bl, ref_mem[x]);
      @(posedge clk); ref_mem[x] = wdata;
      #1 we = 0;
      check("after write", bl, ref_mem[x]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
