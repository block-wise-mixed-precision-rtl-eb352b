// tb_bl_mux: drives distinct values on all bitlines and checks that each OU
// column routes bitlines col*8 .. col*8+7 to lanes 0..7 in order.
module tb_bl_mux;
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
  logic [7:0] bl_sum [XBAR_COLS];
  logic [7:0] ou_col;
  logic [7:0] lane [OU_W];
  bl_mux dut (.*);
  initial begin
    rst_n = 1;
    for (int it = 0; it < 20; it++) begin
      for (int c = 0; c < XBAR_COLS; c++) bl_sum[c] = 8'($urandom());
      for (int col = 0; col < NUM_OU_COLS + 1; col++) begin
        ou_col = 8'(col);
        #1;
        for (int n = 0; n < OU_W; n++)
          check(lane[n] == ((col < NUM_OU_COLS) ? bl_sum[col*OU_W + n] : 8'd0),
                $sformatf("column %0d lane %0d", col, n));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
