// reram_crossbar: behavioural model of a 128 x 128 one-bit-per-cell ReRAM
// crossbar. Not synthesizable intent: the real part is an analog array.
//
// Each cell stores one weight bit as a high or low conductance. Driving a set
// of wordlines makes each bitline carry a current proportional to the number
// of driven wordlines whose cell on that bitline is 1 (Kirchhoff's current
// law). The model returns that count per bitline, as an ideal, noise-free
// integer, for every bitline; the MUX then picks the bitlines of the active
// OU. Cells are programmed one wordline at a time (prog_data bit c is the cell
// on bitline c). Device variation and IR drop, which the OU size limits in the
// real array, are not modelled.
//
// Timing: programming at the clock edge; bl_sum follows wl combinationally.
module reram_crossbar
  import bwq_pkg::*;
#(
  parameter int ROWS = XBAR_ROWS,
  parameter int COLS = XBAR_COLS,
  parameter int SUM_W = $clog2(ROWS + 1)
) (
  input  logic             clk,
  input  logic             prog_we,
  input  logic [7:0]       prog_row,
  input  logic [COLS-1:0]  prog_data,
  input  logic [ROWS-1:0]  wl,
  output logic [SUM_W-1:0] bl_sum [COLS]
);
  // stored by bitline: cells[c][r] is the cell at wordline r, bitline c
  logic [ROWS-1:0] cells [COLS];

  always_ff @(posedge clk)
    if (prog_we && prog_row < 8'(ROWS))
      for (int c = 0; c < COLS; c++) cells[c][prog_row[$clog2(ROWS)-1:0]] <= prog_data[c];

  for (genvar c = 0; c < COLS; c++) begin : g_bl
    assign bl_sum[c] = SUM_W'($countones(wl & cells[c]));
  end
endmodule
