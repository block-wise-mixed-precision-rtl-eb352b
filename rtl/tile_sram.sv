// tile_sram: tile-level register file (input register or output register).
//
// A DEPTH x WIDTH array with one write port and one read port; the read is
// synchronous (data the cycle after re). Used twice in the tile: the 2 KB
// input register (256 words of 64 bits) and the 256 B output register (256
// bytes). The sizes are the paper's; the single-port-pair organisation is this
// design's. Written as an array so synthesis can map it to a memory.
module tile_sram #(
  parameter int DEPTH = 256,
  parameter int WIDTH = 64
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [$clog2(DEPTH)-1:0] waddr,
  input  logic [WIDTH-1:0]         wdata,
  input  logic                     re,
  input  logic [$clog2(DEPTH)-1:0] raddr,
  output logic [WIDTH-1:0]         rdata
);
  logic [WIDTH-1:0] mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
