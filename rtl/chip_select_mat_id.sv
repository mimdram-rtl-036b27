// chip_select_mat_id: chip select logic and mat identifier logic of one
// MIMDRAM DRAM chip.
//
// A PuD command names a logical mat range [mat_begin, mat_end] of 7-bit mat
// indices over the whole module; bits 6:4 name the chip, bits 3:0 the mat
// inside it. This block tells whether the chip holds any mat of the range and
// gives the range's physical part inside this chip:
//   chip_sel   = begin.chip <= chip_id <= end.chip      (2 comparators, AND)
//   pmat_begin = begin.chip == chip_id ? begin.mat : 0  (comparator, 2:1 mux)
//   pmat_end   = end.chip   == chip_id ? end.mat   : 15 (comparator, 2:1 mux)
// The parts list (four comparators, AND gates, two 2:1 multiplexers, a 3-bit
// chip id register) follows the paper; how they are wired is this design's
// reading of it. Purely combinational; the chip id register is in
// mimdram_chip.
module chip_select_mat_id
  import mimdram_pkg::*;
(
  input  logic [LMAT_W-1:0] mat_begin,
  input  logic [LMAT_W-1:0] mat_end,
  input  logic [CHIP_W-1:0] chip_id,
  output logic              chip_sel,
  output logic [PMAT_W-1:0] pmat_begin,
  output logic [PMAT_W-1:0] pmat_end
);
  logic [CHIP_W-1:0] bchip, echip;
  logic              ge_begin, le_end, eq_begin, eq_end;

  always_comb begin
    bchip    = mat_begin[LMAT_W-1 -: CHIP_W];
    echip    = mat_end[LMAT_W-1 -: CHIP_W];
    ge_begin = (chip_id >= bchip);
    le_end   = (chip_id <= echip);
    eq_begin = (chip_id == bchip);
    eq_end   = (chip_id == echip);
    chip_sel   = ge_begin & le_end;
    pmat_begin = eq_begin ? mat_begin[PMAT_W-1:0] : '0;
    pmat_end   = eq_end   ? mat_end[PMAT_W-1:0]   : '1;
  end
endmodule
