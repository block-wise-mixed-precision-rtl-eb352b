// activation_unit: PACT activation and requantisation of the functional unit.
//
// Applies the clipped activation y = min(max(x, 0), beta) to an accumulator
// value x, then maps y to an unsigned code of act_prec bits:
// q = min((y * mult) >> 16, 2^act_prec - 1), where mult is the fixed-point
// factor (2^act_prec - 1) / beta * 2^16 chosen by software for the layer. The
// clip at 0 and beta is the paper's PACT equation; the fixed-point scale and
// the final saturation are this design's. clip_lo / clip_hi report which side
// of the clip was taken.
//
// Timing: one input per cycle, result registered, out_valid one cycle later.
module activation_unit
  import bwq_pkg::*;
(
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    in_valid,
  input  logic signed [ACC_W-1:0] x,
  input  logic [ACC_W-2:0]        beta,
  input  logic [15:0]             mult,
  input  logic [3:0]              act_prec,
  output logic                    out_valid,
  output logic [7:0]              q,
  output logic                    clip_lo,
  output logic                    clip_hi
);
  logic [ACC_W-2:0] y;
  logic [ACC_W+15:0] prod;
  logic [ACC_W+15:0] qraw;
  logic [8:0]        qmax;
  logic              lo, hi;

  always_comb begin
    lo = (x < 0);
    hi = !lo && (x >= $signed({1'b0, beta}));
    y  = lo ? '0 : (hi ? beta : x[ACC_W-2:0]);
    prod = (ACC_W+16)'(y) * (ACC_W+16)'(mult);
    qraw = prod >> 16;
    qmax = (9'd1 << act_prec) - 9'd1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0; q <= '0; clip_lo <= 1'b0; clip_hi <= 1'b0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        q       <= (qraw > (ACC_W+16)'(qmax)) ? qmax[7:0] : qraw[7:0];
        clip_lo <= lo;
        clip_hi <= hi;
      end
    end
  end
endmodule
