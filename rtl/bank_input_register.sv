// bank_input_register: activation store of one PIM bank.
//
// Holds one unsigned activation (up to 8 bits) per crossbar wordline. It is
// filled over the tile bus in 64-bit words, eight activations per word, word w
// carrying wordlines 8w..8w+7 in its bytes, lowest byte first. When the memory
// controller raises fetch, the register latches bit act_bit of the OU_H
// activations that belong to WB row vblk (wordlines vblk*OU_H ..
// vblk*OU_H+OU_H-1) and keeps driving them to the WL decoder until the next
// fetch, so one fetch serves every WB of that row (activation reuse).
// Wordlines past the end of the crossbar read as 0.
//
// Timing: writes take effect at the clock edge; fetched bits appear on wl_bits
// the cycle after fetch. The word layout and the one-cycle latch are this
// design's choices; the paper gives the register's role and the fetch enable.
module bank_input_register
  import bwq_pkg::*;
#(
  parameter int ROWS   = XBAR_ROWS,
  parameter int OUH    = OU_H,
  parameter int WORD_W = BUS_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              we,
  input  logic [7:0]        waddr,
  input  logic [WORD_W-1:0] wdata,
  input  logic              fetch,
  input  logic [7:0]        vblk,
  input  logic [2:0]        act_bit,
  output logic [OUH-1:0]    wl_bits
);
  localparam int PER_WORD = WORD_W / 8;
  localparam int WORDS    = (ROWS + PER_WORD - 1) / PER_WORD;

  logic [7:0] act [WORDS*PER_WORD];

  always_ff @(posedge clk) begin
    if (we && waddr < 8'(WORDS))
      for (int n = 0; n < PER_WORD; n++)
        act[int'(waddr) * PER_WORD + n] <= wdata[8*n +: 8];
  end

  logic [OUH-1:0] sel;
  always_comb begin
    for (int r = 0; r < OUH; r++) begin
      int idx;
      idx = int'(vblk) * OUH + r;
      sel[r] = (idx < ROWS) ? act[idx][act_bit] : 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     wl_bits <= '0;
    else if (fetch) wl_bits <= sel;
  end
endmodule
