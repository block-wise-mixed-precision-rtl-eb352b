// tb_bank_input_register: loads random activations in 64-bit words and
// checks that a fetch of (WB row, activation bit) presents exactly bit t of
// the 9 activations of that row on the next cycle, holds it until the next
// fetch, and reads 0 past the last wordline.
module tb_bank_input_register;
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
  logic we = 0, fetch = 0;
  logic [7:0] waddr = 0, vblk = 0;
  logic [BUS_W-1:0] wdata = 0;
  logic [2:0] act_bit = 0;
  logic [OU_H-1:0] wl_bits;
  int act [XBAR_ROWS];
  bank_input_register dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int r = 0; r < XBAR_ROWS; r++) act[r] = $urandom_range(255);
    for (int w = 0; w < XBAR_ROWS / 8; w++) begin
      @(negedge clk); we = 1; waddr = 8'(w);
      for (int n = 0; n < 8; n++) wdata[8*n +: 8] = 8'(act[8*w + n]);
    end
    @(negedge clk); we = 0;
    for (int it = 0; it < 400; it++) begin
      int j, t;
      logic [OU_H-1:0] e;
      j = $urandom_range(NUM_OU_ROWS); t = $urandom_range(7);
      for (int r = 0; r < OU_H; r++) e[r] = (j*OU_H + r < XBAR_ROWS) ? act[j*OU_H + r][t] : 1'b0;
      fetch = 1; vblk = 8'(j); act_bit = 3'(t);
      @(negedge clk); fetch = 0; vblk = 8'($urandom_range(13)); act_bit = 3'($urandom_range(7));
      check(wl_bits == e, $sformatf("row %0d bit %0d: %b expected %b", j, t, wl_bits, e));
      @(negedge clk);
      check(wl_bits == e, "held without fetch");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
