// wl_decoder: wordline decoder and 1-bit input drivers of a PIM bank.
//
// Decodes the OU row address vblk into the group of OU_H consecutive
// wordlines vblk*OU_H .. vblk*OU_H+OU_H-1 and drives each of them with one
// activation bit from the input register; all other wordlines stay low. With
// 1-bit DACs a wordline is either driven (bit 1) or not (bit 0), so the DAC is
// folded in here as the AND of select and data. Purely combinational.
// The paper gives the decoder's role (activate the rows of the current OU);
// its structure is this design's.
module wl_decoder
  import bwq_pkg::*;
#(
  parameter int ROWS = XBAR_ROWS,
  parameter int OUH  = OU_H
) (
  input  logic            en,
  input  logic [7:0]      vblk,
  input  logic [OUH-1:0]  bits,
  output logic [ROWS-1:0] wl
);
  always_comb begin
    for (int r = 0; r < ROWS; r++)
      wl[r] = en && (r / OUH == int'(vblk)) && bits[r % OUH];
  end
endmodule
