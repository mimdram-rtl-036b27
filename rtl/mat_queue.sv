// mat_queue: the per-chip FIFO of physical mat ranges.
//
// MIMDRAM has no spare C/A pins in the cycle of an ACT, so the mat range of
// an ACT is sent earlier: with the PRE before it (PRE-enqueue) or in the
// cycle after the ACT before it (ACT-enqueue). The chip keeps the ranges in
// this queue and each ACT takes the oldest one. DEPTH = 8 entries as in the
// evaluated setup. Push and pop may happen in the same cycle (ACT-enqueue);
// the head is read combinationally. Reset empties the queue. Pushing into a
// full queue or popping an empty one is an error of the controller and is
// caught by assertions.
module mat_queue
  import mimdram_pkg::*;
#(
  parameter int unsigned DEPTH = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        push,
  input  pmat_range_t push_entry,
  input  logic        pop,
  output pmat_range_t head,
  output logic        empty,
  output logic        full
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  pmat_range_t        mem [DEPTH];
  logic [PW-1:0]      rd_ptr, wr_ptr;
  logic [PW:0]        count;

  assign empty = (count == 0);
  assign full  = (count == (PW+1)'(DEPTH));
  assign head  = mem[rd_ptr];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else begin
      if (push) begin
        mem[wr_ptr] <= push_entry;
        wr_ptr      <= (wr_ptr == PW'(DEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (pop) rd_ptr <= (rd_ptr == PW'(DEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(push) - (PW+1)'(pop);
    end
  end

  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !empty);
  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) (push && !pop) |-> !full);
endmodule
