// bl_mux: bitline multiplexer of a PIM bank.
//
// Connects the OU_W bitlines of OU column ou_col (bitlines ou_col*OU_W ..
// ou_col*OU_W+OU_W-1) to the OU_W ADC inputs, lane n taking bitline
// ou_col*OU_W+n. Out-of-range columns read 0. Combinational. The paper places
// the MUX between crossbar and ADCs and has the controller drive its column
// address; the lane order is this design's.
module bl_mux
  import bwq_pkg::*;
#(
  parameter int COLS  = XBAR_COLS,
  parameter int OUW   = OU_W,
  parameter int SUM_W = $clog2(XBAR_ROWS + 1)
) (
  input  logic [SUM_W-1:0] bl_sum [COLS],
  input  logic [7:0]       ou_col,
  output logic [SUM_W-1:0] lane [OUW]
);
  always_comb begin
    for (int n = 0; n < OUW; n++) begin
      int idx;
      idx = int'(ou_col) * OUW + n;
      lane[n] = (idx < COLS) ? bl_sum[idx] : '0;
    end
  end
endmodule
