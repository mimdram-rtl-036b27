// mimdram_pkg: types and constants shared by the MIMDRAM memory-controller
// logic and the MIMDRAM DRAM-chip model.
//
// Sizes follow the evaluated DDR4 module: 8 chips, 16 mats per chip
// (128 mats in the module), 1 K rows and 512 columns per mat, four helper
// flip-flops (HFFs) per mat, so a column address names one 4-bit column
// group (512 / 4 = 128 groups, 7 bits). A logical mat range is 14 bits:
// 7 bits for the first and 7 for the last mat; the upper 3 bits of each name
// the chip and the lower 4 the mat inside the chip.
//
// The command struct (dram_cmd_t) stands for the DDR4 command/address pins;
// its encoding is this design's own. The bbop struct (bbop_t) is the form a
// bbop takes inside the control unit, after the CPU has replaced its mat
// label by a mat range; its field widths are this design's own.
//
// Row address map of a mat (this design's choice, following the Ambit
// grouping into D, C and B rows): addresses 0 .. ROWS-19 are data rows,
// ROWS-18 is C0 (all zeros), ROWS-17 is C1 (all ones), and the top 16
// addresses B0..B15 drive the bitwise rows T0..T3, DCC0, DCC1 alone or
// two/three at a time (see local_row_decoder).
package mimdram_pkg;

  localparam int unsigned LMAT_W   = 7;   // logical mat index (128 mats)
  localparam int unsigned CHIP_W   = 3;   // chip part of a logical mat index
  localparam int unsigned PMAT_W   = 4;   // physical mat index inside a chip
  localparam int unsigned ROW_W    = 10;  // row address (1 K rows per mat)
  localparam int unsigned COL_W    = 7;   // 4-bit column group (128 per mat)
  localparam int unsigned HFF_BITS = 4;   // helper flip-flops per mat
  localparam int unsigned TAG_W    = 10;  // bbop tag for completion notices

  typedef struct packed {
    logic [LMAT_W-1:0] mat_begin;
    logic [LMAT_W-1:0] mat_end;
  } mat_range_t;

  // One entry of the per-chip mat queue: the physical range and whether the
  // chip holds any mat of it at all.
  typedef struct packed {
    logic              sel;
    logic [PMAT_W-1:0] pbegin;
    logic [PMAT_W-1:0] pend;
  } pmat_range_t;

  typedef enum logic [2:0] {
    DC_NOP     = 3'd0,
    DC_ACT_ENQ = 3'd1,  // ACT (range from the mat queue) + enqueue range
    DC_ACT_DEQ = 3'd2,  // ACT (range from the mat queue)
    DC_PRE     = 3'd3,  // PRE of the mats in range
    DC_PRE_ENQ = 3'd4,  // PRE of the mats in range + enqueue range
    DC_RD      = 3'd5,  // column read of the mats in range
    DC_WR      = 3'd6   // column write of the mats in range
  } dram_op_e;

  typedef struct packed {
    dram_op_e          op;
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
    mat_range_t        range;
    logic              gbmov;     // WR takes data from the neighbour global SA set
    logic              hff_hold;  // RD keeps HFF enable high (LC-MOV)
  } dram_cmd_t;

  localparam dram_cmd_t DRAM_NOP = '{op: DC_NOP, default: '0};

  typedef enum logic [3:0] {
    OP_NOP  = 4'd0,
    OP_ADD  = 4'd1,   // dst[0..n] = src1[0..n-1] + src2[0..n-1]  (bit-serial)
    OP_COPY = 4'd2,   // dst[0..n-1] = src1[0..n-1]                (RowClone)
    OP_MOV  = 4'd3,   // bbop_mov: GB-MOV or LC-MOV of column groups
    OP_SUB  = 4'd4    // dst[0..n] = src1 - src2, dst[n] = no borrow  (bit-serial)
  } bbop_op_e;

  typedef struct packed {
    bbop_op_e          op;
    logic [TAG_W-1:0]  tag;
    mat_range_t        range;     // for OP_MOV: begin = source mat, end = destination mat
    logic [5:0]        nbits;     // bits per element (n)
    logic [ROW_W-1:0]  dst_row;   // first (bit 0) row of the destination
    logic [ROW_W-1:0]  src1_row;
    logic [ROW_W-1:0]  src2_row;
    logic [COL_W-1:0]  src_col;   // OP_MOV: first source column group
    logic [COL_W-1:0]  dst_col;   // OP_MOV: first destination column group
    logic [7:0]        ncols;     // OP_MOV: number of column groups (1..128)
  } bbop_t;

  // One wordline driven by the local row decoder: physical row, and whether
  // the negated (n-) wordline of a dual-contact cell is used.
  typedef struct packed {
    logic             v;
    logic             neg;
    logic [ROW_W-1:0] prow;
  } wl_t;

  // Mask of the logical mats in a range (begin <= i <= end).
  function automatic logic [(1<<LMAT_W)-1:0] range_mask(mat_range_t r);
    logic [(1<<LMAT_W)-1:0] m;
    for (int i = 0; i < (1 << LMAT_W); i++)
      m[i] = (LMAT_W'(i) >= r.mat_begin) && (LMAT_W'(i) <= r.mat_end);
    return m;
  endfunction

endpackage
