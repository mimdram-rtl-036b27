// bbop_buffer: the buffer of bbops waiting in the MIMDRAM control unit.
//
// The CPU pushes bbops at the tail (push/push_ready). The mat scheduler
// reads any entry by index (rd_idx -> rd_bbop, rd_valid, combinational) and
// may remove it (remove at rd_idx), so entries leave out of order. Removed
// entries become holes; the head pointer skips holes, one per cycle, so the
// oldest live entry is always at `head`. The scan range is head..tail-1.
// DEPTH = 1024 entries, as many bbops as the paper's 2 KB buffer is said to
// hold; the entry is this design's bbop_t, wider than 2 KB / 1024 entries
// would allow. Reset empties the buffer.
module bbop_buffer
  import mimdram_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     push,
  input  bbop_t                    push_bbop,
  output logic                     push_ready,
  input  logic [$clog2(DEPTH)-1:0] rd_idx,
  output bbop_t                    rd_bbop,
  output logic                     rd_valid,
  input  logic                     remove,
  output logic [$clog2(DEPTH)-1:0] head,
  output logic [$clog2(DEPTH)-1:0] tail,
  output logic                     empty
);
  localparam int unsigned AW = $clog2(DEPTH);

  bbop_t          mem [DEPTH];
  logic [DEPTH-1:0] valid;
  logic [AW:0]    hp, tp;    // with wrap bit

  assign head       = hp[AW-1:0];
  assign tail       = tp[AW-1:0];
  assign empty      = (hp == tp);
  assign push_ready = ((tp - hp) != (AW+1)'(DEPTH));
  assign rd_bbop    = mem[rd_idx];
  assign rd_valid   = valid[rd_idx];

  always_ff @(posedge clk) begin
    if (push && push_ready) mem[tail] <= push_bbop;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      hp <= '0; tp <= '0; valid <= '0;
    end else begin
      if (push && push_ready) begin
        valid[tail] <= 1'b1;
        tp <= tp + 1'b1;
      end
      if (remove) valid[rd_idx] <= 1'b0;
      if (!empty && (!valid[head] || (remove && rd_idx == head))) hp <= hp + 1'b1;
    end
  end

  a_remove_valid: assert property (@(posedge clk) disable iff (!rst_n) remove |-> rd_valid);
endmodule
