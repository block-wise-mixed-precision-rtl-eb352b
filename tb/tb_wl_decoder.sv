// tb_wl_decoder: for every OU row and random input bits, checks that exactly
// the wordlines of that OU row carry the bits and all others are low, and
// that nothing is driven when disabled.
module tb_wl_decoder;
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
  logic en;
  logic [7:0] vblk;
  logic [OU_H-1:0] bits;
  logic [XBAR_ROWS-1:0] wl;
  wl_decoder dut (.*);
  initial begin
    rst_n = 1;
    for (int it = 0; it < 300; it++) begin
      logic [XBAR_ROWS-1:0] e;
      en = ($urandom_range(4) != 0); vblk = 8'($urandom_range(NUM_OU_ROWS - 1)); bits = OU_H'($urandom());
      e = '0;
      for (int r = 0; r < OU_H; r++) if (en) e[int'(vblk)*OU_H + r] = bits[r];
      #1 check(wl == e, $sformatf("row %0d en %0d bits %b", vblk, en, bits));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
