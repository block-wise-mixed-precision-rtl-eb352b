// tb_bwq_tile: end-to-end test of the BWQ tile at its default size (four
// banks of 128 x 128 cells, 9 x 8 OUs, 2 KB input register, 256 B output
// register).
//
// Each run draws a random layer slice: block precisions 0..8 (small ones
// favoured, so that results arrive faster than the bus can take them),
// weights, and activations. Banks 0 and 1 hold the positive and negative
// parts of one signed weight set over the same inputs; banks 2 and 3 hold two
// more output groups fed by other inputs. The test loads the tile over its
// ports, runs it, reads all 256 outputs and compares them with a reference
// computed here: x_c = sum over banks of +-sum_r a_r * w_rc, then
// q = min((clip(x_c, 0, beta) * mult) >> 16, 2^prec_out - 1).
// It also counts how often each mechanism occurred (skip at a new block,
// activation reuse without a fetch, zero-precision blocks passed over at no
// cost, spare OUs, output-register stalls, bus conflicts, subtracting banks,
// clipping at 0 and at beta) and fails if one never did.
module tb_bwq_tile;
  import bwq_pkg::*;
  localparam int NB = NUM_BANKS;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic ir_we = 0, lut_we = 0, prog_we = 0, start = 0, or_re = 0;
  logic [7:0] ir_waddr = 0, lut_bank = 0, lut_vblk = 0, lut_hblk = 0, prog_bank = 0, prog_row = 0, or_raddr = 0;
  logic [BUS_W-1:0] ir_wdata = 0;
  logic [BW_W-1:0] lut_bw = 0;
  logic [XBAR_COLS-1:0] prog_data = 0;
  logic [NB-1:0] bank_en = '1, negate = 4'b0010;
  logic [7:0] in_base [NB], out_base [NB], num_vblk [NB], num_hblk [NB];
  logic [3:0] act_prec_in = 3, act_prec_out = 4;
  logic [ACC_W-2:0] pact_beta = 1;
  logic [15:0] pact_mult = 0, num_out = 256;
  logic busy, done;
  logic [7:0] or_rdata;
  logic [NB-1:0] bank_stalled, bank_done;
  logic bus_conflict, clip_lo, clip_hi;

  bwq_tile dut (.*);

  // mechanism counters
  int n_skip = 0, n_reuse = 0, n_fetch = 0, n_stall = 0, n_conflict = 0, n_neg = 0;
  int n_clip_lo = 0, n_clip_hi = 0, n_zero_wb = 0, n_spare_ou = 0, n_ou = 0;
  always @(posedge clk) begin
    if (dut.g_bank[0].u_bank.cmd_valid) begin
      n_ou++;
      if (dut.g_bank[0].u_bank.cmd.skip) n_skip++;
      if (dut.g_bank[0].u_bank.ir_en) n_fetch++; else n_reuse++;
    end
    if (bank_stalled != '0) n_stall++;
    if (bus_conflict) n_conflict++;
    if (dut.bus_valid && dut.negate[dut.bus_bank[1:0]]) n_neg++;
    if (clip_lo) n_clip_lo++;
    if (clip_hi) n_clip_hi++;
  end

  int prec [NB][NUM_OU_ROWS][MAX_HBLK];
  int act  [NB][XBAR_ROWS];
  longint accx [OUT_BLKS*OU_W];

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_base  = '{0, 0, 16, 32};
    out_base = '{0, 0, 8, 20};
    num_vblk = '{14, 14, 10, 14};
    num_hblk = '{8, 8, 12, 12};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int run = 0; run < 2; run++) begin
      int bank_ou [NB];
      act_prec_in = (run == 0) ? 4'd3 : 4'd8;
      for (int c = 0; c < OUT_BLKS*OU_W; c++) accx[c] = 0;
      // activations: bank 1 shares bank 0's inputs
      for (int b = 0; b < NB; b++)
        for (int r = 0; r < XBAR_ROWS; r++)
          act[b][r] = (b == 1) ? act[0][r] : $urandom_range((1 << act_prec_in) - 1);
      for (int b = 0; b < NB; b++) if (b != 1)
        for (int w = 0; w < XBAR_ROWS / 8; w++) begin
          @(negedge clk); ir_we = 1; ir_waddr = in_base[b] + 8'(w);
          for (int n = 0; n < 8; n++) ir_wdata[8*n +: 8] = 8'(act[b][8*w + n]);
        end
      @(negedge clk); ir_we = 0;
      // weights, precisions and the crossbar image of every bank
      for (int b = 0; b < NB; b++) begin
        logic [XBAR_COLS-1:0] xb [XBAR_ROWS];
        bank_ou[b] = 0;
        for (int r = 0; r < XBAR_ROWS; r++) xb[r] = '0;
        for (int j = 0; j < NUM_OU_ROWS; j++) begin
          int col;
          col = 0;
          for (int i = 0; i < MAX_HBLK; i++) begin
            int p, u;
            u = $urandom_range(9);
            p = (u < 2) ? 0 : (u < 6) ? 1 : $urandom_range(MAX_WPREC);
            if (j >= int'(num_vblk[b]) || i >= int'(num_hblk[b]) || col + p > NUM_OU_COLS) p = 0;
            if (j < int'(num_vblk[b]) && i < int'(num_hblk[b]) && p == 0 && b == 0) n_zero_wb++;
            prec[b][j][i] = p;
            for (int r = 0; r < OU_H; r++)
              for (int n = 0; n < OU_W; n++) begin
                int wv;
                wv = (p == 0) ? 0 : $urandom_range((1 << p) - 1);
                for (int q = 0; q < p; q++)
                  xb[j*OU_H + r][(col + p - 1 - q) * OU_W + n] = wv[q];
                accx[(int'(out_base[b]) + i) * OU_W + n] +=
                  (negate[b] ? -1 : 1) * longint'(act[b][j*OU_H + r] * wv);
              end
            col += p;
            bank_ou[b] += p;
            @(negedge clk); lut_we = 1; lut_bank = 8'(b); lut_vblk = 8'(j); lut_hblk = 8'(i); lut_bw = 4'(p);
          end
          if (b == 0 && j < int'(num_vblk[b]) && col < NUM_OU_COLS) n_spare_ou += NUM_OU_COLS - col;
        end
        @(negedge clk); lut_we = 0;
        bank_ou[b] *= int'(act_prec_in);
        for (int r = 0; r < XBAR_ROWS; r++) begin
          @(negedge clk); prog_we = 1; prog_bank = 8'(b); prog_row = 8'(r); prog_data = xb[r];
        end
        @(negedge clk); prog_we = 0;
      end
      // PACT range: clip at half the largest accumulated value
      begin
        longint mx;
        mx = 1;
        for (int c = 0; c < OUT_BLKS*OU_W; c++) if (accx[c] > mx) mx = accx[c];
        pact_beta = 31'(mx / 2 + 1);
        pact_mult = 16'((((1 << act_prec_out) - 1) * 65536) / (mx / 2 + 1));
      end
      // run
      begin
        int cyc;
        int ou0;
        ou0 = n_ou;
        @(negedge clk); start = 1;
        @(negedge clk); start = 0;
        cyc = 0;
        while (!done && cyc < 100000) begin @(negedge clk); cyc++; end
        check(done, $sformatf("run %0d finished (%0d cycles)", run, cyc));
        check(n_ou - ou0 == bank_ou[0],
              $sformatf("run %0d: bank 0 issued %0d OUs, expected %0d", run, n_ou - ou0, bank_ou[0]));
        $display("run %0d: %0d cycles, bank OUs %0d %0d %0d %0d", run, cyc,
                 bank_ou[0], bank_ou[1], bank_ou[2], bank_ou[3]);
      end
      // read back and compare
      for (int c = 0; c < 256; c++) begin
        longint y, q, qmax;
        @(negedge clk); or_re = 1; or_raddr = 8'(c);
        @(negedge clk); or_re = 0;
        y = (accx[c] < 0) ? 0 : (accx[c] >= longint'(pact_beta) ? longint'(pact_beta) : accx[c]);
        q = (y * longint'(pact_mult)) >>> 16;
        qmax = (1 << act_prec_out) - 1;
        if (q > qmax) q = qmax;
        check(longint'(or_rdata) == q,
              $sformatf("run %0d output %0d: %0d, expected %0d (acc %0d)", run, c, or_rdata, q, accx[c]));
      end
    end
    check(n_skip > 0,     $sformatf("S&A skip at new blocks: %0d", n_skip));
    check(n_reuse > 0,    $sformatf("OUs reusing fetched activations: %0d", n_reuse));
    check(n_fetch > 0,    $sformatf("input register fetches: %0d", n_fetch));
    check(n_zero_wb > 0,  $sformatf("zero-precision blocks passed over: %0d", n_zero_wb));
    check(n_spare_ou > 0, $sformatf("spare OUs never visited: %0d", n_spare_ou));
    check(n_stall > 0,    $sformatf("output register stalls: %0d", n_stall));
    check(n_conflict > 0, $sformatf("bus conflicts: %0d", n_conflict));
    check(n_neg > 0,      $sformatf("subtracted results: %0d", n_neg));
    check(n_clip_lo > 0,  $sformatf("PACT clips at 0: %0d", n_clip_lo));
    check(n_clip_hi > 0,  $sformatf("PACT clips at beta: %0d", n_clip_hi));
    $display("mechanisms: skip %0d reuse %0d fetch %0d zero-WB %0d spare-OU %0d stall %0d conflict %0d neg %0d clip0 %0d clipB %0d",
             n_skip, n_reuse, n_fetch, n_zero_wb, n_spare_ou, n_stall, n_conflict, n_neg, n_clip_lo, n_clip_hi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
