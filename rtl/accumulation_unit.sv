// accumulation_unit: tile-level accumulation of weight-block partial sums.
//
// A bank result holds, for one activation bit t and one weight block, the
// partial dot products of OU_W output channels over the OU_H inputs of that
// block's WB row. The unit adds psum << t into the accumulators of those
// channels, so that all WB rows, all activation bits and all banks that share
// an output channel sum up. Output channel group = out_base[bank] + hblk; lane
// n is channel group*OU_W + n. A bank flagged negate subtracts instead: the
// crossbar cells hold weight magnitudes only, so a layer's negative weights
// are mapped to a second bank whose results are subtracted.
//
// Interface: clear (zero all accumulators), one input per cycle, and a
// combinational read port by channel number. Timing: accumulators update at
// the edge that samples in_valid. The paper names the unit; the addressing,
// the activation-bit shift here and the sign handling are this design's.
module accumulation_unit
  import bwq_pkg::*;
#(
  parameter int NB    = NUM_BANKS,
  parameter int OUW   = OU_W,
  parameter int NBLK  = OUT_BLKS
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic [7:0]              out_base [NB],
  input  logic [NB-1:0]           negate,
  input  logic                    in_valid,
  input  logic [7:0]              in_bank,
  input  wb_tag_t                 in_tag,
  input  logic [PSUM_W-1:0]       in_psum [OUW],
  input  logic [15:0]             rd_ch,
  output logic signed [ACC_W-1:0] rd_data
);
  logic signed [ACC_W-1:0] acc [NBLK][OUW];

  int blk;
  logic neg;
  logic signed [ACC_W-1:0] term [OUW];
  always_comb begin
    blk = int'(out_base[in_bank[$clog2(NB)-1:0]]) + int'(in_tag.hblk);
    neg = negate[in_bank[$clog2(NB)-1:0]];
    for (int n = 0; n < OUW; n++) term[n] = ACC_W'(in_psum[n]) <<< in_tag.act_bit;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int b = 0; b < NBLK; b++) for (int n = 0; n < OUW; n++) acc[b][n] <= '0;
    end else if (clear) begin
      for (int b = 0; b < NBLK; b++) for (int n = 0; n < OUW; n++) acc[b][n] <= '0;
    end else if (in_valid && blk < NBLK) begin
      for (int n = 0; n < OUW; n++)
        acc[blk][n] <= neg ? acc[blk][n] - term[n] : acc[blk][n] + term[n];
    end
  end

  always_comb begin
    if (int'(rd_ch) < NBLK * OUW) rd_data = acc[int'(rd_ch) / OUW][int'(rd_ch) % OUW];
    else                          rd_data = '0;
  end

  a_blk_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    in_valid |-> blk < NBLK);
endmodule
