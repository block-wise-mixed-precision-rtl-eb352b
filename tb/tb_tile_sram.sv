// tb_tile_sram: writes the 2 KB input-register configuration (256 x 64 bits)
// with random words and reads every address back, checking the one-cycle
// synchronous read and that reads interleaved with writes see old data.
module tb_tile_sram;
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
  logic we = 0, re = 0;
  logic [7:0] waddr = 0, raddr = 0;
  logic [63:0] wdata = 0, rdata;
  logic [63:0] img [256];
  tile_sram #(.DEPTH(256), .WIDTH(64)) dut (.*);
  initial begin
    rst_n = 1;
    for (int a = 0; a < 256; a++) begin
      img[a] = {$urandom(), $urandom()};
      @(negedge clk); we = 1; waddr = 8'(a); wdata = img[a];
    end
    @(negedge clk); we = 0;
    for (int pass = 0; pass < 2; pass++)
      for (int a = 0; a < 256; a++) begin
        int ra;
        ra = (a * 37 + pass) % 256;
        @(negedge clk); re = 1; raddr = 8'(ra);
        we = (pass == 1); waddr = 8'(ra); wdata = ~img[ra];
        @(negedge clk); re = 0; we = 0;
        check(rdata == img[ra], $sformatf("address %0d", ra));
        if (pass == 1) img[ra] = ~img[ra];
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
