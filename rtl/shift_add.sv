// shift_add: shift-and-add (S&A) units of a PIM bank, one per ADC.
//
// A weight block of precision p is spread over p OUs, one bit plane each, and
// the controller visits them most significant plane first. For every valid
// OU result the S&A computes psum = (psum << 1) + adc, so after the last plane
// psum is the dot product of the activation bit with the p-bit weights. On the
// first plane of a WB the controller asserts skip and the S&A loads the ADC
// code instead, so sums of different WBs are never mixed. When last is set the
// finished sums and the WB's tag are presented on res_* for one cycle.
//
// Timing: psum registers update at the edge that samples a valid input;
// res_valid is high the cycle after the last plane. The shift-left recurrence
// and the skip signal are the paper's; the tag and result port are this
// design's.
module shift_add
  import bwq_pkg::*;
#(
  parameter int N     = OU_W,
  parameter int IN_W  = ADC_BITS,
  parameter int OUT_W = PSUM_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             valid,
  input  logic             skip,
  input  logic             last,
  input  wb_tag_t          tag,
  input  logic [IN_W-1:0]  adc  [N],
  output logic             res_valid,
  output wb_tag_t          res_tag,
  output logic [OUT_W-1:0] res_psum [N]
);
  logic [OUT_W-1:0] psum [N];
  logic [OUT_W-1:0] nxt  [N];

  always_comb
    for (int n = 0; n < N; n++)
      nxt[n] = skip ? OUT_W'(adc[n]) : ((psum[n] << 1) + OUT_W'(adc[n]));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      res_valid <= 1'b0;
      res_tag   <= '0;
      for (int n = 0; n < N; n++) begin psum[n] <= '0; res_psum[n] <= '0; end
    end else begin
      res_valid <= valid && last;
      if (valid) begin
        for (int n = 0; n < N; n++) psum[n] <= nxt[n];
        if (last) begin
          res_tag <= tag;
          for (int n = 0; n < N; n++) res_psum[n] <= nxt[n];
        end
      end
    end
  end
endmodule
