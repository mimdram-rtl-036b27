// mat_selector: decodes a physical mat range into matlines.
//
// Shared by all mats of a subarray. When sel is high it raises the matline of
// every mat i with pmat_begin <= i <= pmat_end; each matline switches that
// mat's isolation transistor so the global wordline reaches the mat's row
// decoder latch. Combinational. The function is the paper's; the range
// compare is the simplest circuit that does it.
module mat_selector
  import mimdram_pkg::*;
#(
  parameter int unsigned MATS = 16
) (
  input  logic              sel,
  input  logic [PMAT_W-1:0] pmat_begin,
  input  logic [PMAT_W-1:0] pmat_end,
  output logic [MATS-1:0]   matline
);
  always_comb
    for (int i = 0; i < MATS; i++)
      matline[i] = sel && (PMAT_W'(i) >= pmat_begin) && (PMAT_W'(i) <= pmat_end);
endmodule
