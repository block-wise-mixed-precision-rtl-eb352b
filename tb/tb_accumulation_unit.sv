// tb_accumulation_unit: sends random partial sums from four banks (one of
// them subtracting) with random output bases, WB indices and activation bits,
// and checks every accumulator against sum(+-psum << t); also checks clear.
module tb_accumulation_unit;
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
  logic clear = 0, in_valid = 0;
  logic [7:0] out_base [NUM_BANKS];
  logic [NUM_BANKS-1:0] negate = 4'b0100;
  logic [7:0] in_bank = 0;
  wb_tag_t in_tag = '0;
  logic [PSUM_W-1:0] in_psum [OU_W];
  logic [15:0] rd_ch = 0;
  logic signed [ACC_W-1:0] rd_data;
  longint ref_acc [OUT_BLKS*OU_W];
  accumulation_unit dut (.*);
  initial begin
    out_base = '{0, 4, 10, 20};
    for (int n = 0; n < OU_W; n++) in_psum[n] = 0;
    for (int c = 0; c < OUT_BLKS*OU_W; c++) ref_acc[c] = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int round = 0; round < 2; round++) begin
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int c = 0; c < OUT_BLKS*OU_W; c++) ref_acc[c] = 0;
      for (int it = 0; it < 600; it++) begin
        int b, h, t;
        b = $urandom_range(NUM_BANKS - 1); h = $urandom_range(11); t = $urandom_range(7);
        in_valid = ($urandom_range(3) != 0); in_bank = 8'(b);
        in_tag = '{hblk: 8'(h), vblk: 8'($urandom_range(13)), act_bit: 3'(t)};
        for (int n = 0; n < OU_W; n++) begin
          in_psum[n] = PSUM_W'($urandom_range(4095));
          if (in_valid) ref_acc[(int'(out_base[b]) + h) * OU_W + n] += (negate[b] ? -1 : 1) * (longint'(in_psum[n]) << t);
        end
        @(negedge clk);
      end
      in_valid = 0;
      for (int c = 0; c < OUT_BLKS*OU_W; c++) begin
        rd_ch = 16'(c);
        #1 check(longint'(rd_data) == ref_acc[c], $sformatf("channel %0d: %0d expected %0d", c, rd_data, ref_acc[c]));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
