// dram_mat: behavioural model of one DRAM mat as MIMDRAM uses it (kind:
// behavioural model; the real part is an analog cell array).
//
// The mat holds ROWS-10 physical rows of COLS cells (data rows, C0, C1,
// T0..T3, DCC0, DCC1), its local row buffer (the sense amplifiers), its
// column select logic and four helper flip-flops (HFFs). Commands arrive
// from the row decoder latch (act/pre/row) and from the column path
// (rd/wr/col), already filtered to this mat.
//   ACT on a precharged mat: the decoder's one or three wordlines are
//     raised; the sense amplifiers settle to the value of the single row, or
//     to the bitwise majority of three rows (charge sharing of a triple-row
//     activation), and restore that value into every raised row. A row raised
//     through a negated wordline (!DCC) reads and stores the complement.
//   ACT on an open mat: the row buffer already holds data, so it overwrites
//     the newly raised rows (RowClone copy, second ACT of an AAP).
//   PRE: closes the mat.
//   RD: moves the 4-bit column group `col` of the row buffer into the HFFs.
//     With hff_hold the HFF enable stays high after the RD (LC-MOV).
//   WR: writes a 4-bit column group of the row buffer, and through the
//     sense amplifiers the open rows. The data are wr_data (from the global
//     row buffer) unless HFF enable is still held, in which case the HFFs
//     drive the data they latched (intra-mat move); the WR lowers HFF enable.
// col_data shows the column group `col` of the row buffer, combinationally.
// C0 and C1 read as all-zeros and all-ones and ignore writes, so they need no
// initialisation. Majority, RowClone, dual-contact NOT and the HFF-enable
// behaviour follow the paper; a first ACT on exactly two rows is not used by
// any command sequence here and yields the first row's value (this design's
// choice). Reset closes the mat; the cell contents are not reset.
module dram_mat
  import mimdram_pkg::*;
#(
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 512
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 act,
  input  logic                 pre,
  input  logic [ROW_W-1:0]     row,
  input  logic                 rd,
  input  logic                 wr,
  input  logic [COL_W-1:0]     col,
  input  logic                 hff_hold,
  input  logic [HFF_BITS-1:0]  wr_data,
  output logic [HFF_BITS-1:0]  col_data,
  output logic                 is_open
);
  localparam int unsigned PROWS = ROWS - 10;
  localparam int unsigned P_C0  = ROWS - 18;
  localparam int unsigned P_C1  = ROWS - 17;
  localparam int unsigned NCG   = COLS / HFF_BITS;

  logic [COLS-1:0]     cells [PROWS];
  logic [COLS-1:0]     lrb;
  wl_t                 dec_wl [3];
  wl_t                 open_wl [3];
  logic [HFF_BITS-1:0] hff;
  logic                hff_held;
  logic [COLS-1:0]     rval [3];
  logic [COLS-1:0]     sensed;
  logic [HFF_BITS-1:0] wdata;
  logic [COL_W-1:0]    colx;

  local_row_decoder #(.ROWS(ROWS)) u_dec (.row(row), .wl(dec_wl));

  function automatic logic is_const(logic [ROW_W-1:0] r);
    return (32'(r) == P_C0) || (32'(r) == P_C1);
  endfunction

  // Values the raised rows put on the bitlines.
  always_comb begin
    for (int k = 0; k < 3; k++) begin
      if (32'(dec_wl[k].prow) == P_C0)      rval[k] = '0;
      else if (32'(dec_wl[k].prow) == P_C1) rval[k] = '1;
      else if (32'(dec_wl[k].prow) < PROWS) rval[k] = cells[dec_wl[k].prow];
      else                                  rval[k] = '0;
      if (dec_wl[k].neg) rval[k] = ~rval[k];
    end
    if (dec_wl[2].v)
      sensed = (rval[0] & rval[1]) | (rval[0] & rval[2]) | (rval[1] & rval[2]);
    else
      sensed = rval[0];
  end

  assign colx     = (32'(col) < NCG) ? col : '0;
  assign col_data = lrb[colx*HFF_BITS +: HFF_BITS];
  assign wdata    = hff_held ? hff : wr_data;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      is_open  <= 1'b0;
      hff_held <= 1'b0;
      hff      <= '0;
      lrb      <= '0;
      for (int k = 0; k < 3; k++) open_wl[k] <= '0;
    end else begin
      if (act) begin
        if (!is_open) begin
          lrb <= sensed;
          for (int k = 0; k < 3; k++)
            if (dec_wl[k].v && !is_const(dec_wl[k].prow) && 32'(dec_wl[k].prow) < PROWS)
              cells[dec_wl[k].prow] <= dec_wl[k].neg ? ~sensed : sensed;
        end else begin
          for (int k = 0; k < 3; k++)
            if (dec_wl[k].v && !is_const(dec_wl[k].prow) && 32'(dec_wl[k].prow) < PROWS)
              cells[dec_wl[k].prow] <= dec_wl[k].neg ? ~lrb : lrb;
        end
        is_open <= 1'b1;
        for (int k = 0; k < 3; k++) open_wl[k] <= dec_wl[k];
      end else if (pre) begin
        is_open <= 1'b0;
      end else if (rd && is_open) begin
        hff      <= col_data;
        hff_held <= hff_hold;
      end else if (wr && is_open) begin
        lrb[colx*HFF_BITS +: HFF_BITS] <= wdata;
        for (int k = 0; k < 3; k++)
          if (open_wl[k].v && !is_const(open_wl[k].prow) && 32'(open_wl[k].prow) < PROWS)
            cells[open_wl[k].prow][colx*HFF_BITS +: HFF_BITS] <= open_wl[k].neg ? ~wdata : wdata;
        hff_held <= 1'b0;
      end
    end
  end

  initial assert (COLS % HFF_BITS == 0 && NCG <= (1 << COL_W)) else $error("COLS out of range");
endmodule
