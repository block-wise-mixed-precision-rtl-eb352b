// tb_activation_unit: checks PACT clipping (below 0, inside, at and above
// beta) and requantisation q = min((clip(x) * mult) >> 16, 2^prec - 1) for
// random inputs, precisions 1..8 and scales, with one cycle of latency.
module tb_activation_unit;
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
  logic in_valid = 0, out_valid, clip_lo, clip_hi;
  logic signed [ACC_W-1:0] x = 0;
  logic [ACC_W-2:0] beta = 1;
  logic [15:0] mult = 0;
  logic [3:0] act_prec = 1;
  logic [7:0] q;
  int n_lo = 0, n_hi = 0;
  activation_unit dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 2000; it++) begin
      longint y, e, b;
      int p;
      p = 1 + $urandom_range(7);
      b = 300 + $urandom_range(100000);
      beta = 31'(b); act_prec = 4'(p);
      mult = 16'((((1 << p) - 1) * 65536) / b + $urandom_range(3));
      x = (it % 5 == 0) ? ACC_W'(b) : $signed(ACC_W'($urandom_range(2 * 100300) - 60000));
      in_valid = 1;
      y = (x < 0) ? 0 : (longint'(x) >= b ? b : longint'(x));
      e = (y * longint'(mult)) >>> 16;
      if (e > (1 << p) - 1) e = (1 << p) - 1;
      @(negedge clk); in_valid = 0;
      check(out_valid, "valid one cycle later");
      check(longint'(q) == e, $sformatf("x %0d beta %0d prec %0d: %0d expected %0d", x, b, p, q, e));
      check(clip_lo == (x < 0) && clip_hi == (longint'(x) >= b), "clip flags");
      if (clip_lo) n_lo++;
      if (clip_hi) n_hi++;
    end
    check(n_lo > 0 && n_hi > 0, "both clips taken");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
