// memory_controller: schedules mixed-precision OU operations in one PIM bank.
//
// A look-up table holds the precision (0..8 bits) of every weight block (WB)
// mapped on the crossbar, indexed by WB row (vblk, which is also the OU row)
// and WB position within that row (hblk). With precision-aware mapping each
// bit plane of a WB fills one whole OU, so a WB of precision p occupies p
// consecutive OU columns, most significant plane first. WBs of one WB row are
// packed from OU column 0 in hblk order, so the column pointer restarts at 0
// on every WB row and advances by one OU per bit plane (Col_Start_Idx in the
// paper's control algorithm). OUs beyond a row's total precision are spare and
// are never visited; WBs of precision 0 cost no cycle.
//
// Loop order, outermost first: activation bit (bit-serial inputs through 1-bit
// DACs, LSB first), WB row, WB, bit plane. Each WB row's activation bits are
// fetched once from the input register (ir_en) and reused for all WBs of the
// row. On the first bit plane of each WB, skip tells the shift-and-add unit not
// to fold the new result into the previous WB's sum.
//
// Interface: LUT write port; num_vblk / num_hblk / act_prec configuration;
// start pulse; hold (back-pressure from the output register) freezes issue.
// Timing: one OU command per cycle while running and not held; cmd is
// combinational from the state registers; done pulses in the cycle after the
// last command. A run of N = act_prec * sum(precisions) OUs takes N cycles.
//
// From the paper: the LUT of WB bit-widths, the OU address, skip and IR-enable
// outputs, the MSB-first shift-left accumulation and the per-bit column step.
// This design's own choices: the activation-bit loop order, left packing of
// WBs within a row, the hold input and the command struct.
module memory_controller
  import bwq_pkg::*;
#(
  parameter int OU_ROWS  = NUM_OU_ROWS,
  parameter int OU_COLS  = NUM_OU_COLS,
  parameter int HBLK_MAX = MAX_HBLK
) (
  input  logic            clk,
  input  logic            rst_n,
  // bit-width table write port
  input  logic            lut_we,
  input  logic [7:0]      lut_vblk,
  input  logic [7:0]      lut_hblk,
  input  logic [BW_W-1:0] lut_bw,
  // layer configuration
  input  logic [7:0]      num_vblk,   // WB rows in use
  input  logic [7:0]      num_hblk,   // WBs per row in use
  input  logic [3:0]      act_prec,   // activation bits (1..8)
  input  logic            start,
  input  logic            hold,
  output logic            busy,
  output logic            done,
  output logic            cmd_valid,
  output ou_cmd_t         cmd,
  output logic            ir_en
);

  logic [BW_W-1:0] lut [OU_ROWS][HBLK_MAX];

  always_ff @(posedge clk) begin
    if (lut_we && lut_vblk < 8'(OU_ROWS) && lut_hblk < 8'(HBLK_MAX))
      lut[lut_vblk[$clog2(OU_ROWS)-1:0]][lut_hblk[$clog2(HBLK_MAX)-1:0]] <= lut_bw;
  end

  typedef enum logic {S_IDLE, S_RUN} state_t;
  state_t st;

  logic [7:0] cur_j, cur_i, cur_col;
  logic [3:0] cur_k;
  logic [2:0] cur_t;
  logic       row_first;

  // WB rows holding at least one WB of non-zero precision
  logic [OU_ROWS-1:0] row_nz;
  always_comb begin
    for (int r = 0; r < OU_ROWS; r++) begin
      row_nz[r] = 1'b0;
      for (int h = 0; h < HBLK_MAX; h++)
        if (r < int'(num_vblk) && h < int'(num_hblk) && lut[r][h] != '0)
          row_nz[r] = 1'b1;
    end
  end

  // first non-zero row, next non-zero row after cur_j
  logic       any_nz, nxt_j_found;
  logic [7:0] first_j, nxt_j;
  always_comb begin
    any_nz = 1'b0; first_j = '0; nxt_j_found = 1'b0; nxt_j = '0;
    for (int r = OU_ROWS - 1; r >= 0; r--) begin
      if (row_nz[r]) begin
        any_nz = 1'b1; first_j = 8'(r);
        if (r > int'(cur_j)) begin nxt_j_found = 1'b1; nxt_j = 8'(r); end
      end
    end
  end

  // next non-zero WB after cur_i in row cur_j
  logic       nxt_i_found;
  logic [7:0] nxt_i;
  always_comb begin
    nxt_i_found = 1'b0; nxt_i = '0;
    for (int h = HBLK_MAX - 1; h >= 0; h--)
      if (h > int'(cur_i) && h < int'(num_hblk) && lut[cur_j[$clog2(OU_ROWS)-1:0]][h] != '0) begin
        nxt_i_found = 1'b1; nxt_i = 8'(h);
      end
  end

  // row entered next and its first non-zero WB
  logic [7:0] tgt_j, tgt_i;
  always_comb begin
    tgt_j = (st == S_RUN && nxt_j_found) ? nxt_j : first_j;
    tgt_i = '0;
    for (int h = HBLK_MAX - 1; h >= 0; h--)
      if (h < int'(num_hblk) && lut[tgt_j[$clog2(OU_ROWS)-1:0]][h] != '0) tgt_i = 8'(h);
  end

  logic [BW_W-1:0] cur_bw;
  assign cur_bw = lut[cur_j[$clog2(OU_ROWS)-1:0]][cur_i[$clog2(HBLK_MAX)-1:0]];

  assign busy      = (st == S_RUN);
  assign cmd_valid = (st == S_RUN) && !hold;
  assign ir_en     = cmd_valid && row_first;
  always_comb begin
    cmd.vblk    = cur_j;
    cmd.hblk    = cur_i;
    cmd.ou_col  = cur_col;
    cmd.act_bit = cur_t;
    cmd.skip    = (cur_k == 4'd0);
    cmd.last    = ({1'b0, cur_k} + 5'd1 == {1'b0, cur_bw});
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= S_IDLE; done <= 1'b0;
      cur_j <= '0; cur_i <= '0; cur_col <= '0; cur_k <= '0; cur_t <= '0;
      row_first <= 1'b0;
    end else begin
      done <= 1'b0;
      case (st)
        S_IDLE: if (start) begin
          if (!any_nz || act_prec == 4'd0) begin
            done <= 1'b1;
          end else begin
            st <= S_RUN;
            cur_t <= '0; cur_j <= tgt_j; cur_i <= tgt_i;
            cur_k <= '0; cur_col <= '0; row_first <= 1'b1;
          end
        end
        S_RUN: if (!hold) begin
          row_first <= 1'b0;
          cur_col   <= cur_col + 8'd1;
          if (!cmd.last) begin
            cur_k <= cur_k + 4'd1;           // next bit plane of the same WB
          end else if (nxt_i_found) begin
            cur_i <= nxt_i; cur_k <= '0;     // next WB of the row
          end else begin
            cur_k <= '0; cur_col <= '0; row_first <= 1'b1;  // row finished
            cur_j <= tgt_j; cur_i <= tgt_i;
            if (!nxt_j_found) begin
              if ({1'b0, cur_t} + 4'd1 < act_prec) begin
                cur_t <= cur_t + 3'd1;
              end else begin
                st <= S_IDLE; done <= 1'b1; row_first <= 1'b0;
              end
            end
          end
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  // The packed WB row must fit in the crossbar.
  a_col_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid |-> cur_col < 8'(OU_COLS));

endmodule
