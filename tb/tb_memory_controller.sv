// tb_memory_controller: self-checking test of the mixed-precision OU scheduler.
//
// Part 1 replays the two-block example of a 4 x 4 crossbar with 2 x 2 OUs:
// WB1 (rows 1-2) has 2 bits, WB2 (rows 3-4) has 1 bit, activations have 2
// bits. Six OU cycles are expected, with skip on each new block and an input
// register fetch at each new block row. Part 2 fills the full-size LUT with
// random precisions (including 0), builds the expected command list with a
// plain nested-loop model, and compares every issued command, with random
// hold (back-pressure) cycles and a check of the cycle count.
module tb_memory_controller;
  import bwq_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- small instance (2 x 2 OUs) ----------------
  logic s_lut_we, s_start, s_busy, s_done, s_valid, s_ir_en;
  logic [7:0] s_vblk, s_hblk, s_nv, s_nh;
  logic [BW_W-1:0] s_bw;
  logic [3:0] s_ap;
  ou_cmd_t s_cmd;
  memory_controller #(.OU_ROWS(2), .OU_COLS(2), .HBLK_MAX(2)) u_small (
    .clk, .rst_n, .lut_we(s_lut_we), .lut_vblk(s_vblk), .lut_hblk(s_hblk), .lut_bw(s_bw),
    .num_vblk(s_nv), .num_hblk(s_nh), .act_prec(s_ap), .start(s_start), .hold(1'b0),
    .busy(s_busy), .done(s_done), .cmd_valid(s_valid), .cmd(s_cmd), .ir_en(s_ir_en));

  // ---------------- full-size instance ----------------
  logic f_lut_we, f_start, f_hold, f_busy, f_done, f_valid, f_ir_en;
  logic [7:0] f_vblk, f_hblk, f_nv, f_nh;
  logic [BW_W-1:0] f_bw;
  logic [3:0] f_ap;
  ou_cmd_t f_cmd;
  memory_controller u_full (
    .clk, .rst_n, .lut_we(f_lut_we), .lut_vblk(f_vblk), .lut_hblk(f_hblk), .lut_bw(f_bw),
    .num_vblk(f_nv), .num_hblk(f_nh), .act_prec(f_ap), .start(f_start), .hold(f_hold),
    .busy(f_busy), .done(f_done), .cmd_valid(f_valid), .cmd(f_cmd), .ir_en(f_ir_en));

  int bw_tab [NUM_OU_ROWS][MAX_HBLK];
  typedef struct { int t, j, i, col, skip, last, ir; } exp_t;
  exp_t expq[$];

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc, n_ou, issued;
    s_lut_we = 0; s_start = 0; s_vblk = 0; s_hblk = 0; s_bw = 0; s_nv = 2; s_nh = 1; s_ap = 2;
    f_lut_we = 0; f_start = 0; f_hold = 0; f_vblk = 0; f_hblk = 0; f_bw = 0; f_nv = 0; f_nh = 0; f_ap = 1;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // ---- part 1: the two-block example ----
    for (int r = 0; r < 2; r++) for (int h = 0; h < 2; h++) begin
      @(negedge clk); s_lut_we = 1; s_vblk = 8'(r); s_hblk = 8'(h);
      s_bw = (h != 0) ? 4'd0 : (r == 0 ? 4'd2 : 4'd1);
    end
    @(negedge clk); s_lut_we = 0; s_start = 1;
    @(negedge clk); s_start = 0;
    begin
      // expected (act_bit, row, col, skip, last, ir_en) for C1..C6
      int e [6][6] = '{'{0,0,0,1,0,1}, '{0,0,1,0,1,0}, '{0,1,0,1,1,1},
                       '{1,0,0,1,0,1}, '{1,0,1,0,1,0}, '{1,1,0,1,1,1}};
      for (int c = 0; c < 6; c++) begin
        check(s_valid, $sformatf("example C%0d valid", c + 1));
        check(int'(s_cmd.act_bit) == e[c][0] && int'(s_cmd.vblk) == e[c][1] &&
              int'(s_cmd.ou_col) == e[c][2] && int'(s_cmd.skip) == e[c][3] &&
              int'(s_cmd.last) == e[c][4] && int'(s_ir_en) == e[c][5],
              $sformatf("example C%0d cmd t=%0d j=%0d col=%0d skip=%0d last=%0d ir=%0d", c + 1,
                        s_cmd.act_bit, s_cmd.vblk, s_cmd.ou_col, s_cmd.skip, s_cmd.last, s_ir_en));
        @(negedge clk);
      end
      check(!s_valid && !s_busy, "example finishes after 6 cycles");
    end

    // ---- part 2: random tables on the full-size controller ----
    for (int trial = 0; trial < 6; trial++) begin
      int nv, nh, ap;
      nv = 1 + $urandom_range(NUM_OU_ROWS - 1);
      nh = 1 + $urandom_range(MAX_HBLK - 1);
      ap = 1 + $urandom_range(MAX_APREC - 1);
      for (int r = 0; r < NUM_OU_ROWS; r++) begin
        int tot;
        tot = 0;
        for (int h = 0; h < MAX_HBLK; h++) begin
          int p;
          p = ($urandom_range(3) == 0) ? 0 : 1 + $urandom_range(MAX_WPREC - 1);
          if (r == 2 && trial > 1) p = 0;                   // an all-zero block row
          if (h < nh && r < nv && tot + p > NUM_OU_COLS) p = 0; // row must fit the crossbar
          if (h < nh && r < nv) tot += p;
          bw_tab[r][h] = p;
          @(negedge clk); f_lut_we = 1; f_vblk = 8'(r); f_hblk = 8'(h); f_bw = 4'(p);
        end
      end
      @(negedge clk); f_lut_we = 0;
      // reference schedule
      expq.delete();
      for (int t = 0; t < ap; t++)
        for (int j = 0; j < nv; j++) begin
          int col, first;
          col = 0; first = 1;
          for (int i = 0; i < nh; i++)
            for (int k = 0; k < bw_tab[j][i]; k++) begin
              expq.push_back('{t, j, i, col, (k == 0), (k == bw_tab[j][i] - 1), first});
              col++; first = 0;
            end
        end
      n_ou = expq.size();
      f_nv = 8'(nv); f_nh = 8'(nh); f_ap = 4'(ap);
      f_start = 1;
      @(negedge clk); f_start = 0;
      cyc = 0; issued = 0;
      while (f_busy && cyc < 20000) begin
        f_hold = (trial >= 3) ? ($urandom_range(3) == 0) : 1'b0;
        #1;
        if (f_valid) begin
          exp_t e;
          e = expq.pop_front();
          issued++;
          check(int'(f_cmd.act_bit) == e.t && int'(f_cmd.vblk) == e.j && int'(f_cmd.hblk) == e.i &&
                int'(f_cmd.ou_col) == e.col && int'(f_cmd.skip) == e.skip &&
                int'(f_cmd.last) == e.last && int'(f_ir_en) == e.ir,
                $sformatf("trial %0d OU %0d: got t%0d j%0d i%0d col%0d s%0d l%0d ir%0d exp t%0d j%0d i%0d col%0d s%0d l%0d ir%0d",
                          trial, issued, f_cmd.act_bit, f_cmd.vblk, f_cmd.hblk, f_cmd.ou_col, f_cmd.skip,
                          f_cmd.last, f_ir_en, e.t, e.j, e.i, e.col, e.skip, e.last, e.ir));
        end
        @(negedge clk); cyc++;
      end
      f_hold = 0;
      check(issued == n_ou, $sformatf("trial %0d issued %0d of %0d OUs", trial, issued, n_ou));
      if (trial < 3)
        check(cyc == n_ou, $sformatf("trial %0d: %0d cycles for %0d OUs (one OU per cycle)", trial, cyc, n_ou));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
