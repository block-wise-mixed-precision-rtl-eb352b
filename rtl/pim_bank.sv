// pim_bank: one processing-in-memory bank of the BWQ tile.
//
// Puts together the bank input register, WL decoder (with 1-bit DACs), the
// 128 x 128 ReRAM crossbar, the bitline MUX, OU_W ADCs, OU_W shift-and-add
// units, the output register and the memory controller. The controller walks
// the mixed-precision OU schedule from its bit-width LUT; each OU operation
// multiplies OU_H activation bits by one bit plane of one weight block and
// yields OU_W bitline sums, which the S&A units fold, most significant plane
// first, into the weight block's partial sums. Finished partial sums leave
// through res_* with a tag (WB row, WB index, activation bit).
//
// Pipeline: cycle 0 the controller issues an OU command (and, on a new WB
// row, the IR fetch); cycle 1 the command is registered, the WLs are driven
// and the ADC codes reach the S&A units; cycle 2 a finished WB is queued in
// the output register, whose head is presented the next cycle. Throughput is
// one OU per cycle: N OUs issue on the N cycles after start and the last
// result is presented N+3 cycles after start, unless the output register
// fills and holds the controller.
//
// Ports: lut_* (controller LUT), ir_* (input register, 64-bit words),
// prog_* (crossbar cells, one wordline per write), layer configuration,
// start/busy/done, and the result stream with valid/ready.
// The bank's contents and the control signals follow the paper's block
// diagram; the pipeline registers and back-pressure are this design's.
module pim_bank
  import bwq_pkg::*;
#(
  parameter int ROWS     = XBAR_ROWS,
  parameter int COLS     = XBAR_COLS,
  parameter int OUH      = OU_H,
  parameter int OUW      = OU_W,
  parameter int HBLK_MAX = MAX_HBLK,
  parameter int OR_DEPTH = 4
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              lut_we,
  input  logic [7:0]        lut_vblk,
  input  logic [7:0]        lut_hblk,
  input  logic [BW_W-1:0]   lut_bw,
  input  logic              ir_we,
  input  logic [7:0]        ir_waddr,
  input  logic [BUS_W-1:0]  ir_wdata,
  input  logic              prog_we,
  input  logic [7:0]        prog_row,
  input  logic [COLS-1:0]   prog_data,
  input  logic [7:0]        num_vblk,
  input  logic [7:0]        num_hblk,
  input  logic [3:0]        act_prec,
  input  logic              start,
  output logic              busy,
  output logic              done,
  output logic              res_valid,
  input  logic              res_ready,
  output wb_tag_t           res_tag,
  output logic [PSUM_W-1:0] res_psum [OUW],
  output logic              stalled      // controller held by a full output register
);
  localparam int SUM_W = $clog2(ROWS + 1);
  localparam int DW    = $bits(wb_tag_t) + OUW * PSUM_W;

  logic    cmd_valid, ir_en, hold, ctrl_busy;
  ou_cmd_t cmd;

  memory_controller #(.OU_ROWS(ROWS / OUH), .OU_COLS(COLS / OUW), .HBLK_MAX(HBLK_MAX)) u_ctrl (
    .clk, .rst_n, .lut_we, .lut_vblk, .lut_hblk, .lut_bw,
    .num_vblk, .num_hblk, .act_prec, .start, .hold,
    .busy(ctrl_busy), .done, .cmd_valid, .cmd, .ir_en);

  logic [OUH-1:0] wl_bits;
  bank_input_register #(.ROWS(ROWS), .OUH(OUH), .WORD_W(BUS_W)) u_ir (
    .clk, .rst_n, .we(ir_we), .waddr(ir_waddr), .wdata(ir_wdata),
    .fetch(ir_en), .vblk(cmd.vblk), .act_bit(cmd.act_bit), .wl_bits);

  // stage 1 command register
  logic    s1_valid;
  ou_cmd_t s1_cmd;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin s1_valid <= 1'b0; s1_cmd <= '0; end
    else begin s1_valid <= cmd_valid; if (cmd_valid) s1_cmd <= cmd; end
  end

  logic [ROWS-1:0] wl;
  wl_decoder #(.ROWS(ROWS), .OUH(OUH)) u_wld (
    .en(s1_valid), .vblk(s1_cmd.vblk), .bits(wl_bits), .wl);

  logic [SUM_W-1:0] bl_sum [COLS];
  reram_crossbar #(.ROWS(ROWS), .COLS(COLS)) u_xbar (
    .clk, .prog_we, .prog_row, .prog_data, .wl, .bl_sum);

  logic [SUM_W-1:0] lane [OUW];
  bl_mux #(.COLS(COLS), .OUW(OUW), .SUM_W(SUM_W)) u_mux (
    .bl_sum, .ou_col(s1_cmd.ou_col), .lane);

  logic [ADC_BITS-1:0] code [OUW];
  adc_array #(.N(OUW), .IN_W(SUM_W), .BITS(ADC_BITS)) u_adc (.ain(lane), .code);

  wb_tag_t s1_tag;
  assign s1_tag = '{hblk: s1_cmd.hblk, vblk: s1_cmd.vblk, act_bit: s1_cmd.act_bit};

  logic             sa_valid;
  wb_tag_t          sa_tag;
  logic [PSUM_W-1:0] sa_psum [OUW];
  shift_add #(.N(OUW), .IN_W(ADC_BITS), .OUT_W(PSUM_W)) u_sa (
    .clk, .rst_n, .valid(s1_valid), .skip(s1_cmd.skip), .last(s1_cmd.last),
    .tag(s1_tag), .adc(code), .res_valid(sa_valid), .res_tag(sa_tag), .res_psum(sa_psum));

  logic [DW-1:0] push_data, head;
  always_comb begin
    push_data = '0;
    push_data[DW-1 -: $bits(wb_tag_t)] = sa_tag;
    for (int n = 0; n < OUW; n++) push_data[n*PSUM_W +: PSUM_W] = sa_psum[n];
  end

  logic or_empty;
  bank_output_register #(.DW(DW), .DEPTH(OR_DEPTH)) u_or (
    .clk, .rst_n, .push(sa_valid), .push_data, .valid(res_valid), .ready(res_ready),
    .data(head), .almost_full(hold), .empty(or_empty));

  always_comb begin
    res_tag = head[DW-1 -: $bits(wb_tag_t)];
    for (int n = 0; n < OUW; n++) res_psum[n] = head[n*PSUM_W +: PSUM_W];
  end

  assign busy    = ctrl_busy || s1_valid || sa_valid || !or_empty;
  assign stalled = ctrl_busy && hold;
endmodule
