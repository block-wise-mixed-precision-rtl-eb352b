// bwq_tile: one tile of the BWQ ReRAM accelerator, the top of this design.
//
// Computes a slice of a quantised layer, out = PACT(sum_i w_i * a_i), where
// the weights were quantised block-wise: each 9 x 8 weight block (one OU) has
// its own precision of 0..8 bits. The tile holds a 2 KB input register, NB PIM
// banks (each a 128 x 128 one-bit ReRAM crossbar with its own memory
// controller), a local bus, an accumulation unit, an activation unit and a
// 256 B output register.
//
// Operation, started by a start pulse after the host has loaded the input
// register, the crossbar cells, the bit-width tables and the configuration:
//  1. LOAD  - copy, for every bank, 16 64-bit words (128 activations) from the
//             tile input register at in_base[b] into the bank input register
//             (one word per cycle, 16*NB cycles); clear the accumulators.
//  2. RUN   - start every enabled bank. Each bank walks its mixed-precision OU
//             schedule; finished weight-block sums go over the bus into the
//             accumulation unit (shifted by their activation bit, negated for
//             banks holding negative weights).
//  3. ACT   - once all banks are idle, pass channels 0..num_out-1 through the
//             activation unit into the output register, one per cycle.
//  4. done pulses; the host reads the output register through or_*.
//
// The block structure (tile IR, banks, bus, accumulation, functional unit,
// tile OR) follows the paper's architecture figure. The sequencer, the load
// layout, the sign handling and the configuration ports are this design's
// choices. Links to other tiles (NoC) and external memory are represented by
// the load/store ports.
module bwq_tile
  import bwq_pkg::*;
#(
  parameter int NB       = NUM_BANKS,
  parameter int ROWS     = XBAR_ROWS,
  parameter int COLS     = XBAR_COLS,
  parameter int OR_DEPTH = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // tile input register load (from NoC / external memory)
  input  logic                   ir_we,
  input  logic [7:0]             ir_waddr,
  input  logic [BUS_W-1:0]       ir_wdata,
  // bit-width LUT write
  input  logic                   lut_we,
  input  logic [7:0]             lut_bank,
  input  logic [7:0]             lut_vblk,
  input  logic [7:0]             lut_hblk,
  input  logic [BW_W-1:0]        lut_bw,
  // crossbar programming
  input  logic                   prog_we,
  input  logic [7:0]             prog_bank,
  input  logic [7:0]             prog_row,
  input  logic [COLS-1:0]        prog_data,
  // layer configuration
  input  logic [NB-1:0]          bank_en,
  input  logic [7:0]             in_base  [NB],
  input  logic [7:0]             out_base [NB],
  input  logic [NB-1:0]          negate,
  input  logic [7:0]             num_vblk [NB],
  input  logic [7:0]             num_hblk [NB],
  input  logic [3:0]             act_prec_in,
  input  logic [3:0]             act_prec_out,
  input  logic [ACC_W-2:0]       pact_beta,
  input  logic [15:0]            pact_mult,
  input  logic [15:0]            num_out,
  // control
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // output register read
  input  logic                   or_re,
  input  logic [7:0]             or_raddr,
  output logic [7:0]             or_rdata,
  // status, one cycle each event
  output logic [NB-1:0]          bank_stalled,  // bank held by its full output register
  output logic [NB-1:0]          bank_done,     // bank finished issuing
  output logic                   bus_conflict,  // several banks wanted the bus
  output logic                   clip_lo,       // PACT clipped an output at 0
  output logic                   clip_hi        // PACT clipped an output at beta
);
  localparam int IR_WORDS = ROWS * 8 / BUS_W;  // bank IR words
  localparam int NBW      = (NB > 1) ? $clog2(NB) : 1;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_RUN, S_WAIT, S_ACT, S_FLUSH, S_DONE} st_t;
  st_t st;

  // ---------------- tile input register ----------------
  logic             tir_re;
  logic [7:0]       tir_raddr;
  logic [BUS_W-1:0] tir_rdata;
  tile_sram #(.DEPTH(TILE_IR_WORDS), .WIDTH(BUS_W)) u_tile_ir (
    .clk, .we(ir_we), .waddr(ir_waddr), .wdata(ir_wdata),
    .re(tir_re), .raddr(tir_raddr), .rdata(tir_rdata));

  // ---------------- sequencer ----------------
  logic [NBW-1:0] ld_b;
  logic [7:0]     ld_w;
  logic           p_valid;
  logic [NBW-1:0] p_bank;
  logic [7:0]     p_word;
  logic [15:0]    o_cnt;
  logic           acc_clear, bank_start;

  assign tir_re    = (st == S_LOAD);
  assign tir_raddr = in_base[ld_b] + ld_w;
  assign acc_clear = (st == S_IDLE) && start;
  assign bank_start = (st == S_RUN);
  assign busy      = (st != S_IDLE);

  logic [NB-1:0] b_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; ld_b <= '0; ld_w <= '0; p_valid <= 1'b0; p_bank <= '0;
      p_word <= '0; o_cnt <= '0; done <= 1'b0;
    end else begin
      done    <= 1'b0;
      p_valid <= (st == S_LOAD);
      p_bank  <= ld_b;
      p_word  <= ld_w;
      case (st)
        S_IDLE: if (start) begin st <= S_LOAD; ld_b <= '0; ld_w <= '0; end
        S_LOAD: begin
          if (int'(ld_w) == IR_WORDS - 1) begin
            ld_w <= '0;
            if (int'(ld_b) == NB - 1) st <= S_RUN;
            else ld_b <= ld_b + 1'b1;
          end else ld_w <= ld_w + 8'd1;
        end
        S_RUN:  st <= S_WAIT;
        S_WAIT: if (b_busy == '0) begin
          o_cnt <= '0;
          st <= (num_out == 16'd0) ? S_FLUSH : S_ACT;
        end
        S_ACT: begin
          o_cnt <= o_cnt + 16'd1;
          if (o_cnt + 16'd1 == num_out) st <= S_FLUSH;
        end
        S_FLUSH: st <= S_DONE;
        S_DONE:  begin done <= 1'b1; st <= S_IDLE; end
        default: st <= S_IDLE;
      endcase
    end
  end

  // ---------------- PIM banks ----------------
  logic [NB-1:0]     b_res_valid, b_gnt;
  wb_tag_t           b_tag  [NB];
  logic [PSUM_W-1:0] b_psum [NB][OU_W];

  for (genvar b = 0; b < NB; b++) begin : g_bank
    pim_bank #(.ROWS(ROWS), .COLS(COLS), .OR_DEPTH(OR_DEPTH)) u_bank (
      .clk, .rst_n,
      .lut_we(lut_we && lut_bank == 8'(b)), .lut_vblk, .lut_hblk, .lut_bw,
      .ir_we(p_valid && p_bank == NBW'(b)), .ir_waddr(p_word), .ir_wdata(tir_rdata),
      .prog_we(prog_we && prog_bank == 8'(b)), .prog_row, .prog_data,
      .num_vblk(num_vblk[b]), .num_hblk(num_hblk[b]), .act_prec(act_prec_in),
      .start(bank_start && bank_en[b]), .busy(b_busy[b]), .done(bank_done[b]),
      .res_valid(b_res_valid[b]), .res_ready(b_gnt[b]),
      .res_tag(b_tag[b]), .res_psum(b_psum[b]), .stalled(bank_stalled[b]));
  end

  // ---------------- bus and accumulation ----------------
  logic              bus_valid;
  logic [7:0]        bus_bank;
  wb_tag_t           bus_tag;
  logic [PSUM_W-1:0] bus_psum [OU_W];

  tile_bus #(.NB(NB), .OUW(OU_W)) u_bus (
    .clk, .rst_n, .req(b_res_valid), .req_tag(b_tag), .req_psum(b_psum),
    .gnt(b_gnt), .out_valid(bus_valid), .out_bank(bus_bank), .out_tag(bus_tag),
    .out_psum(bus_psum), .conflict(bus_conflict));

  logic signed [ACC_W-1:0] acc_rd;
  accumulation_unit #(.NB(NB), .OUW(OU_W), .NBLK(OUT_BLKS)) u_acc (
    .clk, .rst_n, .clear(acc_clear), .out_base, .negate,
    .in_valid(bus_valid), .in_bank(bus_bank), .in_tag(bus_tag), .in_psum(bus_psum),
    .rd_ch(o_cnt), .rd_data(acc_rd));

  // ---------------- functional unit and tile output register ----------------
  logic       au_valid, au_clip_lo, au_clip_hi;
  assign clip_lo = au_valid && au_clip_lo;
  assign clip_hi = au_valid && au_clip_hi;
  logic [7:0] au_q;
  logic [7:0] au_addr;
  activation_unit u_act (
    .clk, .rst_n, .in_valid(st == S_ACT), .x(acc_rd), .beta(pact_beta),
    .mult(pact_mult), .act_prec(act_prec_out),
    .out_valid(au_valid), .q(au_q), .clip_lo(au_clip_lo), .clip_hi(au_clip_hi));

  always_ff @(posedge clk) au_addr <= o_cnt[7:0];

  tile_sram #(.DEPTH(TILE_OR_BYTES), .WIDTH(8)) u_tile_or (
    .clk, .we(au_valid), .waddr(au_addr), .wdata(au_q),
    .re(or_re), .raddr(or_raddr), .rdata(or_rdata));

endmodule
