// row_decoder_latch: per-mat latch between the global wordline and the
// mat's local row decoder.
//
// The global row decoder broadcasts a row address and an ACT or PRE strobe
// to all mats of the subarray. Only mats whose matline is high (their mat
// isolation transistor conducts) capture it. The captured row address stays
// in the latch, so the mat keeps its rows driven while the memory controller
// addresses other mats with later commands: this is what lets different mats
// of one subarray run different PuD operations at the same time.
// Timing: a strobe seen at a clock edge with matline high appears on
// act_q/pre_q for one cycle after that edge; row_q holds the row until the
// next captured ACT. This design uses an edge-triggered register where the
// silicon would use a level latch. Reset clears the strobes and the row.
module row_decoder_latch
  import mimdram_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             matline,
  input  logic [ROW_W-1:0] gwl_row,
  input  logic             act,
  input  logic             pre,
  output logic [ROW_W-1:0] row_q,
  output logic             act_q,
  output logic             pre_q
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      row_q <= '0;
      act_q <= 1'b0;
      pre_q <= 1'b0;
    end else begin
      act_q <= matline & act;
      pre_q <= matline & pre;
      if (matline & act) row_q <= gwl_row;
    end
  end
endmodule
