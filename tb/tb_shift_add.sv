// tb_shift_add: checks the shift-and-add recurrence over random weight blocks
// of 1..8 bit planes, MSB first: the result must equal sum_b code_b * 2^b,
// must appear exactly one cycle after the last plane, and a block must not
// inherit the previous block's sum (skip).
module tb_shift_add;
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
  logic valid = 0, skip = 0, last = 0, res_valid;
  wb_tag_t tag = '0, res_tag;
  logic [ADC_BITS-1:0] adc [OU_W];
  logic [PSUM_W-1:0] res_psum [OU_W];
  shift_add dut (.*);
  initial begin
    for (int n = 0; n < OU_W; n++) adc[n] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int wb = 0; wb < 200; wb++) begin
      int p, e [OU_W];
      p = 1 + $urandom_range(MAX_WPREC - 1);
      for (int n = 0; n < OU_W; n++) e[n] = 0;
      for (int k = 0; k < p; k++) begin
        @(negedge clk);
        valid = 1; skip = (k == 0); last = (k == p - 1); tag = '{hblk: 8'(wb), vblk: 8'(p), act_bit: 3'(k)};
        for (int n = 0; n < OU_W; n++) begin
          adc[n] = 4'($urandom_range(9));
          e[n] = e[n] * 2 + int'(adc[n]);
        end
        #1 check(!res_valid || k == 0, "no result in the middle of a block");
      end
      @(negedge clk); valid = 0; skip = 0; last = 0;
      for (int n = 0; n < OU_W; n++) adc[n] = 4'($urandom_range(15));
      #1;
      check(res_valid, $sformatf("block %0d result valid one cycle after last plane", wb));
      check(res_tag.hblk == 8'(wb), "tag follows the block");
      for (int n = 0; n < OU_W; n++)
        check(int'(res_psum[n]) == e[n], $sformatf("block %0d lane %0d: %0d expected %0d", wb, n, res_psum[n], e[n]));
      if ($urandom_range(1) == 1) begin @(negedge clk); #1 check(!res_valid, "result lasts one cycle"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
