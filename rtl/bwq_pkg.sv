// bwq_pkg: sizes and types shared by the block-wise mixed-precision (BWQ)
// ReRAM tile.
//
// The numbers that come from the paper's hardware table are the crossbar size
// (128 x 128, one bit per cell), the operation unit (OU) of 9 wordlines by 8
// bitlines, the 4-bit ADC, the 64-bit buffer width, the 2 KB tile input
// register and the 256 B tile output register. The 8-bit upper bound on weight
// and activation precision is the training start point of the quantisation
// algorithm (every block starts at 8 bits, activations start at 8 bits).
// Everything else here (index widths, accumulator width, four banks per tile)
// is a choice of this design.
package bwq_pkg;

  localparam int XBAR_ROWS   = 128;  // wordlines per crossbar
  localparam int XBAR_COLS   = 128;  // bitlines per crossbar
  localparam int OU_H        = 9;    // wordlines active at once (OU height)
  localparam int OU_W        = 8;    // bitlines active at once (OU width)
  localparam int ADC_BITS    = 4;    // ADC resolution
  localparam int MAX_WPREC   = 8;    // largest weight-block precision
  localparam int MAX_APREC   = 8;    // largest activation precision
  localparam int NUM_OU_ROWS = XBAR_ROWS / OU_H;  // 14 full OU rows
  localparam int NUM_OU_COLS = XBAR_COLS / OU_W;  // 16 OU columns
  localparam int MAX_HBLK    = 16;   // weight blocks per WB row held in the LUT
  localparam int BW_W        = 4;    // LUT entry: precision 0..8
  localparam int PSUM_W      = ADC_BITS + MAX_WPREC;  // S&A result width
  localparam int ACC_W       = 32;   // accumulation unit word
  localparam int BUS_W       = 64;   // buffer / bus word
  localparam int NUM_BANKS   = 4;    // PIM banks per tile
  localparam int TILE_IR_WORDS = 2048 * 8 / BUS_W;  // 2 KB of 64-bit words
  localparam int TILE_OR_BYTES = 256;               // 256 B, one 8-bit activation each
  localparam int OUT_BLKS    = TILE_OR_BYTES / OU_W; // output channel groups

  // One OU operation as issued by the memory controller.
  typedef struct packed {
    logic [7:0] vblk;     // WB row, selects the OU row (wordlines)
    logic [7:0] hblk;     // WB index within that row (output channel group)
    logic [7:0] ou_col;   // OU column, selects the bitlines through the MUX
    logic [2:0] act_bit;  // activation bit driven on the wordlines
    logic       skip;     // first bit plane of a WB: S&A restarts
    logic       last;     // last bit plane of a WB: result is complete
  } ou_cmd_t;

  // Identifies a finished weight-block partial sum.
  typedef struct packed {
    logic [7:0] hblk;
    logic [7:0] vblk;
    logic [2:0] act_bit;
  } wb_tag_t;

endpackage
