// tb_workload_conv: one complete convolution layer of a CIFAR-10 ResNet-20
// (3 x 3 kernel, 16 input and 16 output channels: 144 inputs x 16 outputs)
// run on one tile at its default size.
//
// The layer does not fit one bank's 126 wordlines, so it is split by rows:
// banks 0 and 1 hold input rows 0..125 (14 OU rows), banks 2 and 3 hold rows
// 126..143 (2 OU rows). Banks 0 and 2 hold the positive parts of the signed
// weights, banks 1 and 3 (flagged negate) the negative parts, and all four
// accumulate into the same 16 output channels. Block precisions are drawn
// uniformly from 0..4, a mean of 2 bits, which is the 16x compression over
// 32-bit weights reported for this network; activations are 3 bits.
//
// The test compares all 16 outputs with a reference computed here, checks
// that bank 0 issued exactly act_prec * sum(block precisions) OUs, and prints
// that count next to the count an 8-bit uniform mapping of the same slice
// would need.
module tb_workload_conv;
  import bwq_pkg::*;
  localparam int NB = NUM_BANKS;
  localparam int N_IN = 144, N_OUT = 16, APREC = 3;
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
  logic [NB-1:0] bank_en = '1, negate = 4'b1010;
  logic [7:0] in_base [NB], out_base [NB], num_vblk [NB], num_hblk [NB];
  logic [3:0] act_prec_in = APREC, act_prec_out = 3;
  logic [ACC_W-2:0] pact_beta = 1;
  logic [15:0] pact_mult = 0, num_out = N_OUT;
  logic busy, done;
  logic [7:0] or_rdata;
  logic [NB-1:0] bank_stalled, bank_done;
  logic bus_conflict, clip_lo, clip_hi;

  bwq_tile dut (.*);

  int n_ou0 = 0;
  always @(posedge clk) if (dut.g_bank[0].u_bank.cmd_valid) n_ou0++;

  int act [N_IN];
  int wgt [N_IN][N_OUT];             // signed weights
  int prec [N_IN/OU_H][N_OUT/OU_W];  // one precision per 9 x 8 block
  longint ref_acc [N_OUT];

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int sum_bw0;
    in_base  = '{0, 0, 16, 16};
    out_base = '{0, 0, 0, 0};
    num_vblk = '{14, 14, 2, 2};
    num_hblk = '{2, 2, 2, 2};
    repeat (2) @(posedge clk);
    rst_n = 1;

    // layer data
    for (int r = 0; r < N_IN; r++) act[r] = $urandom_range((1 << APREC) - 1);
    for (int j = 0; j < N_IN/OU_H; j++)
      for (int i = 0; i < N_OUT/OU_W; i++) begin
        prec[j][i] = $urandom_range(4);
        for (int r = 0; r < OU_H; r++)
          for (int n = 0; n < OU_W; n++) begin
            int m;
            m = (prec[j][i] == 0) ? 0 : $urandom_range((1 << prec[j][i]) - 1);
            wgt[j*OU_H + r][i*OU_W + n] = $urandom_range(1) ? m : -m;
          end
      end
    for (int c = 0; c < N_OUT; c++) begin
      ref_acc[c] = 0;
      for (int r = 0; r < N_IN; r++) ref_acc[c] += longint'(act[r] * wgt[r][c]);
    end

    // tile input register: words 0..15 hold inputs 0..125, words 16..18 inputs 126..143
    for (int w = 0; w < 19; w++) begin
      @(negedge clk); ir_we = 1; ir_waddr = 8'(w);
      for (int n = 0; n < 8; n++) begin
        int r;
        r = (w < 16) ? 8*w + n : 126 + 8*(w - 16) + n;
        ir_wdata[8*n +: 8] = (w < 16 && r >= 126) || r >= N_IN ? 8'd0 : 8'(act[r]);
      end
    end
    @(negedge clk); ir_we = 0;

    // crossbars and bit-width tables
    sum_bw0 = 0;
    for (int b = 0; b < NB; b++) begin
      logic [XBAR_COLS-1:0] xb [XBAR_ROWS];
      int row0;
      row0 = (b < 2) ? 0 : 126;
      for (int r = 0; r < XBAR_ROWS; r++) xb[r] = '0;
      for (int j = 0; j < int'(num_vblk[b]); j++) begin
        int col;
        col = 0;
        for (int i = 0; i < N_OUT/OU_W; i++) begin
          int p;
          p = prec[row0/OU_H + j][i];
          for (int r = 0; r < OU_H; r++)
            for (int n = 0; n < OU_W; n++) begin
              int w, mag;
              w = wgt[row0 + j*OU_H + r][i*OU_W + n];
              mag = negate[b] ? (w < 0 ? -w : 0) : (w > 0 ? w : 0);
              for (int q = 0; q < p; q++)
                xb[j*OU_H + r][(col + p - 1 - q) * OU_W + n] = mag[q];
            end
          col += p;
          if (b == 0) sum_bw0 += p;
          @(negedge clk); lut_we = 1; lut_bank = 8'(b); lut_vblk = 8'(j); lut_hblk = 8'(i); lut_bw = 4'(p);
        end
      end
      @(negedge clk); lut_we = 0;
      for (int r = 0; r < XBAR_ROWS; r++) begin
        @(negedge clk); prog_we = 1; prog_bank = 8'(b); prog_row = 8'(r); prog_data = xb[r];
      end
      @(negedge clk); prog_we = 0;
    end

    // PACT: clip at the largest output, scale to 3 bits
    begin
      longint mx;
      mx = 1;
      for (int c = 0; c < N_OUT; c++) if (ref_acc[c] > mx) mx = ref_acc[c];
      pact_beta = 31'(mx);
      pact_mult = 16'((7 * 65536) / mx);
    end

    begin
      int cyc;
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
      cyc = 0;
      while (!done && cyc < 50000) begin @(negedge clk); cyc++; end
      check(done, $sformatf("layer finished (%0d cycles)", cyc));
      check(n_ou0 == APREC * sum_bw0,
            $sformatf("bank 0 issued %0d OUs, expected %0d", n_ou0, APREC * sum_bw0));
      $display("bank 0: %0d OUs with block-wise precision, %0d with 8-bit weights; tile %0d cycles",
               n_ou0, APREC * 14 * 2 * 8, cyc);
    end

    for (int c = 0; c < N_OUT; c++) begin
      longint y, q;
      @(negedge clk); or_re = 1; or_raddr = 8'(c);
      @(negedge clk); or_re = 0;
      y = (ref_acc[c] < 0) ? 0 : (ref_acc[c] >= longint'(pact_beta) ? longint'(pact_beta) : ref_acc[c]);
      q = (y * longint'(pact_mult)) >>> 16;
      if (q > 7) q = 7;
      check(longint'(or_rdata) == q,
            $sformatf("output %0d: %0d, expected %0d (acc %0d)", c, or_rdata, q, ref_acc[c]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
