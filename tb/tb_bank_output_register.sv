// tb_bank_output_register: pushes a numbered stream through the queue with a
// random consumer, keeping to almost_full as the bank does (no push once it
// is raised, except for the two entries already in flight), and checks order,
// the almost_full threshold and that nothing is lost.
module tb_bank_output_register;
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
  localparam int DW = 16, DEPTH = 4;
  logic push = 0, ready = 0, valid, almost_full, empty;
  logic [DW-1:0] push_data = 0, data;
  int sent = 0, rcvd = 0, occ = 0, n_af = 0;
  bank_output_register #(.DW(DW), .DEPTH(DEPTH)) dut (.*);
  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    while (rcvd < 500) begin
      @(negedge clk);
      #1;
      check(almost_full == (occ >= DEPTH - 2), $sformatf("almost_full at %0d entries", occ));
      check(valid == (occ > 0), "valid when not empty");
      if (almost_full) n_af++;
      push = (sent < 500) && !almost_full && ($urandom_range(3) != 0);
      push_data = 16'(sent);
      ready = ($urandom_range(2) == 0);
      if (valid && ready) begin
        check(int'(data) == rcvd, $sformatf("entry %0d read as %0d", rcvd, data));
        rcvd++;
      end
      occ = occ + int'(push) - int'(valid && ready);
      if (push) sent++;
      @(posedge clk); #1 push = 0; ready = 0;
    end
    check(n_af > 0, "queue filled at least once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
