// tb_reram_crossbar: programs random cells and checks every bitline sum
// against a popcount of (driven wordlines AND cells), for random sparse and
// dense wordline patterns.
module tb_reram_crossbar;
  import bwq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic prog_we = 0;
  logic [7:0] prog_row = 0;
  logic [XBAR_COLS-1:0] prog_data = 0;
  logic [XBAR_ROWS-1:0] wl = 0;
  logic [7:0] bl_sum [XBAR_COLS];
  logic [XBAR_COLS-1:0] img [XBAR_ROWS];
  reram_crossbar dut (.*);
  initial begin
    rst_n = 1;
    for (int r = 0; r < XBAR_ROWS; r++) begin
      for (int c = 0; c < XBAR_COLS; c += 32) img[r][c +: 32] = $urandom();
      @(negedge clk); prog_we = 1; prog_row = 8'(r); prog_data = img[r];
    end
    @(negedge clk); prog_we = 0;
    for (int it = 0; it < 40; it++) begin
      for (int r = 0; r < XBAR_ROWS; r++) wl[r] = (it % 2 == 0) ? ($urandom_range(15) == 0) : $urandom_range(1);
      #1;
      for (int c = 0; c < XBAR_COLS; c++) begin
        int e;
        e = 0;
        for (int r = 0; r < XBAR_ROWS; r++) e += int'(wl[r] & img[r][c]);
        check(int'(bl_sum[c]) == e, $sformatf("pattern %0d BL %0d: %0d expected %0d", it, c, bl_sum[c], e));
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
