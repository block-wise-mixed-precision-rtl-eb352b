// tile_bus: the tile's local bus from the PIM banks to the accumulation unit.
//
// Several banks finish weight blocks at the same time, but the accumulation
// unit takes one result per cycle. The bus grants one requesting bank per
// cycle in round-robin order (the bank after the last one granted has
// priority), forwards its tag and partial sums together with the bank number,
// and returns ready to that bank only. Combinational grant, registered
// round-robin pointer. The paper shows a single shared bus; the arbitration
// is this design's.
module tile_bus
  import bwq_pkg::*;
#(
  parameter int NB  = NUM_BANKS,
  parameter int OUW = OU_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NB-1:0]     req,
  input  wb_tag_t           req_tag  [NB],
  input  logic [PSUM_W-1:0] req_psum [NB][OUW],
  output logic [NB-1:0]     gnt,
  output logic              out_valid,
  output logic [7:0]        out_bank,
  output wb_tag_t           out_tag,
  output logic [PSUM_W-1:0] out_psum [OUW],
  output logic              conflict   // more than one bank requested
);
  localparam int BW = (NB > 1) ? $clog2(NB) : 1;
  logic [BW-1:0] last_g;
  logic [BW-1:0] sel, cand;

  always_comb begin
    gnt = '0; sel = '0; cand = '0; out_valid = 1'b0;
    for (int o = NB; o >= 1; o--) begin
      cand = BW'((int'(last_g) + o) % NB);
      if (req[cand]) begin sel = cand; out_valid = 1'b1; end
    end
    if (out_valid) gnt[sel] = 1'b1;
    out_bank = 8'(sel);
    out_tag  = req_tag[sel];
    for (int n = 0; n < OUW; n++) out_psum[n] = req_psum[sel][n];
    conflict = ($countones(req) > 1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last_g <= BW'(NB - 1);
    else if (out_valid) last_g <= sel;
  end

  a_onehot_gnt: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
