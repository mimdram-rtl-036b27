// mat_scoreboard: the mat bitmap of the MIMDRAM control unit.
//
// One busy bit per mat of the module (MODULE_MATS = 128). The scheduler
// indexes it with a mat range (q_begin..q_end) and learns whether all those
// mats are free (q_free, combinational). set_en marks a range busy at the
// next clock edge; clr_mask frees the mats of engines that finished in this
// cycle (several at once). If a bit is set and cleared in the same cycle,
// the set wins. Reset frees every mat. The bitmap and its use follow the
// paper (Fig. 7); the port timing is this design's.
module mat_scoreboard
  import mimdram_pkg::*;
#(
  parameter int unsigned MODULE_MATS = 128
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  mat_range_t             q_range,
  output logic                   q_free,
  input  logic                   set_en,
  input  mat_range_t             set_range,
  input  logic [MODULE_MATS-1:0] clr_mask,
  output logic [MODULE_MATS-1:0] bitmap
);
  function automatic logic [MODULE_MATS-1:0] mask_of(mat_range_t r);
    logic [MODULE_MATS-1:0] m;
    for (int i = 0; i < MODULE_MATS; i++)
      m[i] = (32'(r.mat_begin) <= i) && (i <= 32'(r.mat_end));
    return m;
  endfunction

  assign q_free = ((bitmap & mask_of(q_range)) == '0);

  always_ff @(posedge clk) begin
    if (!rst_n) bitmap <= '0;
    else bitmap <= (bitmap & ~clr_mask) | (set_en ? mask_of(set_range) : '0);
  end

  a_no_double_alloc: assert property (@(posedge clk) disable iff (!rst_n)
    set_en |-> ((bitmap & ~clr_mask & mask_of(set_range)) == '0));
endmodule
