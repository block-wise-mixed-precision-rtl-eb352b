// tb_tile_bus: random requests from four banks; checks that one requester is
// granted per cycle, that the grant is the first requester after the last
// one granted (round robin), that the granted bank's data is forwarded and
// that conflict flags more than one request.
module tb_tile_bus;
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
  logic [NUM_BANKS-1:0] req, gnt;
  wb_tag_t req_tag [NUM_BANKS], out_tag;
  logic [PSUM_W-1:0] req_psum [NUM_BANKS][OU_W], out_psum [OU_W];
  logic out_valid, conflict;
  logic [7:0] out_bank;
  int last = NUM_BANKS - 1, n_conf = 0;
  tile_bus dut (.*);
  initial begin
    req = '0;
    for (int b = 0; b < NUM_BANKS; b++) begin
      req_tag[b] = '{hblk: 8'(b), vblk: 8'(b * 3), act_bit: 3'(b)};
      for (int n = 0; n < OU_W; n++) req_psum[b][n] = PSUM_W'(b * 100 + n);
    end
    repeat (2) @(negedge clk); rst_n = 1;
    for (int it = 0; it < 500; it++) begin
      int e;
      @(negedge clk);
      req = NUM_BANKS'($urandom());
      #1;
      e = -1;
      for (int o = 1; o <= NUM_BANKS; o++) if (e < 0 && req[(last + o) % NUM_BANKS]) e = (last + o) % NUM_BANKS;
      check(out_valid == (req != 0), "valid when any bank requests");
      check(conflict == ($countones(req) > 1), "conflict flag");
      if (conflict) n_conf++;
      if (e >= 0) begin
        check(gnt == NUM_BANKS'(1 << e), $sformatf("grant %b expected bank %0d (req %b)", gnt, e, req));
        check(int'(out_bank) == e && out_tag == req_tag[e] && out_psum[3] == req_psum[e][3], "forwarded data");
        last = e;
      end else check(gnt == '0, "no grant without request");
    end
    check(n_conf > 0, "conflicts seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
