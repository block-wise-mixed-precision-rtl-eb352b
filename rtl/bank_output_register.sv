// bank_output_register: output register of a PIM bank.
//
// A small first-in first-out queue of finished weight-block results (tag plus
// OU_W partial sums, packed into DW bits) waiting for the tile bus. It lets the
// crossbar keep issuing while the shared bus serves another bank; when it
// fills up, almost_full holds the memory controller (a stall). almost_full is
// raised at DEPTH-2 entries because two results can still be in flight in the
// bank pipeline when the hold takes effect.
//
// Interface: push/push_data in; valid/ready/data out (data is the head entry,
// taken when valid && ready). Timing: registered, one push and one pop per
// cycle. The paper names the output register; the queue depth and the
// back-pressure are this design's.
module bank_output_register #(
  parameter int DW    = 128,
  parameter int DEPTH = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [DW-1:0] push_data,
  output logic          valid,
  input  logic          ready,
  output logic [DW-1:0] data,
  output logic          almost_full,
  output logic          empty
);
  localparam int AW = $clog2(DEPTH);
  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   cnt;
  logic          pop;

  assign pop         = valid && ready;
  assign valid       = (cnt != '0);
  assign empty       = (cnt == '0);
  assign data        = mem[rp];
  assign almost_full = (int'(cnt) >= DEPTH - 2);

  always_ff @(posedge clk) if (push) mem[wp] <= push_data;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0;
    end else begin
      if (push) wp <= (int'(wp) == DEPTH - 1) ? '0 : wp + 1'b1;
      if (pop)  rp <= (int'(rp) == DEPTH - 1) ? '0 : rp + 1'b1;
      cnt <= cnt + (AW+1)'(push) - (AW+1)'(pop);
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
    push |-> (int'(cnt) < DEPTH || pop));
endmodule
