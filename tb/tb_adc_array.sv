// tb_adc_array: checks the 4-bit conversion for every bitline sum 0..128:
// exact up to 15, saturated above.
module tb_adc_array;
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
  logic [7:0] ain [OU_W];
  logic [ADC_BITS-1:0] code [OU_W];
  adc_array dut (.*);
  initial begin
    rst_n = 1;
    for (int v = 0; v <= XBAR_ROWS; v++) begin
      for (int n = 0; n < OU_W; n++) ain[n] = 8'((v + n * 5) % (XBAR_ROWS + 1));
      #1;
      for (int n = 0; n < OU_W; n++) begin
        int x;
        x = (v + n * 5) % (XBAR_ROWS + 1);
        check(int'(code[n]) == ((x > 15) ? 15 : x), $sformatf("input %0d gives %0d", x, code[n]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
