// tb_pim_bank: end-to-end test of one PIM bank at full size (128 x 128
// crossbar, 9 x 8 OUs).
//
// Draws random block precisions and weights, programs the crossbar with the
// precision-aware layout (bit plane b of block (j,i) of precision p lives in
// OU column colstart(j,i) + p-1-b, where colstart packs the blocks of a row
// from column 0), loads random activations, runs the bank and compares every
// finished block partial sum with sum_r bit_t(a[9j+r]) * w[j][i][r][n]
// computed here. One run takes results at full speed and checks the cycle
// count: N OUs issue on N consecutive cycles from the cycle after start, and
// the last result is presented 3 cycles after its OU (command register, S&A,
// output register), so it is taken N+3 cycles after start; the next runs
// take results only now and then, so the output register fills and the
// controller stalls.
module tb_pim_bank;
  import bwq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, stalls = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic lut_we = 0, ir_we = 0, prog_we = 0, start = 0, res_ready = 0;
  logic [7:0] lut_vblk = 0, lut_hblk = 0, ir_waddr = 0, prog_row = 0, num_vblk = 0, num_hblk = 0;
  logic [BW_W-1:0] lut_bw = 0;
  logic [BUS_W-1:0] ir_wdata = 0;
  logic [XBAR_COLS-1:0] prog_data = 0;
  logic [3:0] act_prec = 1;
  logic busy, done, res_valid, stalled;
  wb_tag_t res_tag;
  logic [PSUM_W-1:0] res_psum [OU_W];

  pim_bank dut (.*);

  always @(posedge clk) if (stalled) stalls++;

  int prec [NUM_OU_ROWS][MAX_HBLK];
  int wt   [NUM_OU_ROWS][MAX_HBLK][OU_H][OU_W];
  int act  [XBAR_ROWS];
  logic [XBAR_COLS-1:0] xb [XBAR_ROWS];

  initial begin : watchdog
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int trial = 0; trial < 3; trial++) begin
      int nv, nh, ap, n_ou, cyc, got;
      nv = (trial == 0) ? NUM_OU_ROWS : 3 + $urandom_range(8);
      nh = (trial == 0) ? 6 : 2 + $urandom_range(10);
      ap = (trial == 0) ? 3 : 1 + $urandom_range(7);
      for (int r = 0; r < XBAR_ROWS; r++) xb[r] = '0;
      n_ou = 0;
      for (int j = 0; j < NUM_OU_ROWS; j++) begin
        int col;
        col = 0;
        for (int i = 0; i < MAX_HBLK; i++) begin
          int p;
          p = ($urandom_range(4) == 0) ? 0 : 1 + $urandom_range(MAX_WPREC - 1);
          if (j >= nv || i >= nh || col + p > NUM_OU_COLS) p = 0;
          prec[j][i] = p;
          for (int r = 0; r < OU_H; r++)
            for (int n = 0; n < OU_W; n++) begin
              wt[j][i][r][n] = (p == 0) ? 0 : $urandom_range((1 << p) - 1);
              for (int b = 0; b < p; b++)
                xb[j*OU_H + r][(col + p - 1 - b) * OU_W + n] = wt[j][i][r][n][b];
            end
          col += p;
          n_ou += p;
          @(negedge clk); lut_we = 1; lut_vblk = 8'(j); lut_hblk = 8'(i); lut_bw = 4'(p);
        end
      end
      @(negedge clk); lut_we = 0;
      n_ou *= ap;
      for (int r = 0; r < XBAR_ROWS; r++) begin
        @(negedge clk); prog_we = 1; prog_row = 8'(r); prog_data = xb[r];
      end
      @(negedge clk); prog_we = 0;
      for (int r = 0; r < XBAR_ROWS; r++) act[r] = $urandom_range((1 << ap) - 1);
      for (int w = 0; w < XBAR_ROWS / 8; w++) begin
        @(negedge clk); ir_we = 1; ir_waddr = 8'(w);
        for (int n = 0; n < 8; n++) ir_wdata[8*n +: 8] = 8'(act[8*w + n]);
      end
      @(negedge clk); ir_we = 0;
      num_vblk = 8'(nv); num_hblk = 8'(nh); act_prec = 4'(ap);
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1; got = 0;
      for (int t = 0; t < ap; t++)
        for (int j = 0; j < nv; j++)
          for (int i = 0; i < nh; i++) begin
            if (prec[j][i] == 0) continue;
            res_ready = (trial == 0) ? 1'b1 : ($urandom_range(3) == 0);
            #1;
            while (!(res_valid && res_ready)) begin
              @(negedge clk); cyc++;
              res_ready = (trial == 0) ? 1'b1 : ($urandom_range(3) == 0);
              #1;
            end
            got++;
            check(int'(res_tag.act_bit) == t && int'(res_tag.vblk) == j && int'(res_tag.hblk) == i,
                  $sformatf("trial %0d tag t%0d j%0d i%0d, expected t%0d j%0d i%0d", trial,
                            res_tag.act_bit, res_tag.vblk, res_tag.hblk, t, j, i));
            for (int n = 0; n < OU_W; n++) begin
              int e;
              e = 0;
              for (int r = 0; r < OU_H; r++) e += act[j*OU_H + r][t] * wt[j][i][r][n];
              check(int'(res_psum[n]) == e, $sformatf("trial %0d t%0d j%0d i%0d lane %0d: %0d, expected %0d",
                                                      trial, t, j, i, n, res_psum[n], e));
            end
            @(negedge clk); cyc++;
          end
      res_ready = 0;
      #1;
      check(!busy, $sformatf("trial %0d bank idle after last result", trial));
      if (trial == 0)
        check(cyc == n_ou + 4, $sformatf("trial 0: %0d cycles from start to taking the last result for %0d OUs", cyc, n_ou));
      repeat (3) @(negedge clk);
    end
    check(stalls > 0, $sformatf("output register back-pressure stalled the controller %0d times", stalls));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
