// mimdram_subarray: the PuD subarray of one MIMDRAM chip.
//
// A row of MATS mats shares the global wordline (driven here from `row` by
// the global row decoder), the column select lines and the global row
// buffer. MIMDRAM's mat selector turns a physical mat range into matlines;
// each matline lets that mat's row decoder latch capture the ACT/PRE on the
// global wordline, so ACTs and PREs affect only the mats of their range and
// every mat keeps its own open rows. RD/WR are gated by the same matlines.
// The global row buffer carries the inter-mat interconnect (GB-MOV).
// Timing: a command applied at a clock edge reaches the mats one cycle later
// (row decoder latch, and a matching register on the column path); RD data
// reach io_rdata two cycles after the RD; io_wdata is sampled with the WR.
// Structure follows the paper's Fig. 4; the single-cycle latches are this
// design's timing.
module mimdram_subarray
  import mimdram_pkg::*;
#(
  parameter int unsigned MATS = 16,
  parameter int unsigned ROWS = 1024,
  parameter int unsigned COLS = 512
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     act,
  input  logic                     pre,
  input  logic                     rd,
  input  logic                     wr,
  input  logic [ROW_W-1:0]         row,
  input  logic [COL_W-1:0]         col,
  input  logic                     gbmov,
  input  logic                     hff_hold,
  input  logic                     sel,
  input  logic [PMAT_W-1:0]        pmat_begin,
  input  logic [PMAT_W-1:0]        pmat_end,
  input  logic [MATS*HFF_BITS-1:0] io_wdata,
  output logic [MATS*HFF_BITS-1:0] io_rdata,
  output logic [MATS-1:0]          mat_open
);
  logic [MATS-1:0]               matline;
  logic [MATS-1:0]               rd_q, wr_q;
  logic [COL_W-1:0]              col_q;
  logic                          gbmov_q, hold_q;
  logic [MATS*HFF_BITS-1:0]      io_wdata_q;
  logic [MATS-1:0][HFF_BITS-1:0] mat_data, wr_data;

  mat_selector #(.MATS(MATS)) u_sel (
    .sel(sel), .pmat_begin(pmat_begin), .pmat_end(pmat_end), .matline(matline));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_q <= '0; wr_q <= '0; col_q <= '0; gbmov_q <= 1'b0; hold_q <= 1'b0; io_wdata_q <= '0;
    end else begin
      rd_q       <= {MATS{rd}} & matline;
      wr_q       <= {MATS{wr}} & matline;
      col_q      <= col;
      gbmov_q    <= gbmov;
      hold_q     <= hff_hold;
      io_wdata_q <= io_wdata;
    end
  end

  for (genvar i = 0; i < MATS; i++) begin : g_mat
    logic [ROW_W-1:0] row_l;
    logic             act_l, pre_l;
    row_decoder_latch u_rdl (
      .clk(clk), .rst_n(rst_n), .matline(matline[i]), .gwl_row(row),
      .act(act), .pre(pre), .row_q(row_l), .act_q(act_l), .pre_q(pre_l));
    dram_mat #(.ROWS(ROWS), .COLS(COLS)) u_mat (
      .clk(clk), .rst_n(rst_n), .act(act_l), .pre(pre_l), .row(row_l),
      .rd(rd_q[i]), .wr(wr_q[i]), .col(col_q), .hff_hold(hold_q),
      .wr_data(wr_data[i]), .col_data(mat_data[i]), .is_open(mat_open[i]));
  end

  global_row_buffer #(.MATS(MATS)) u_grb (
    .clk(clk), .rst_n(rst_n), .rd(rd_q), .wr(wr_q), .gbmov(gbmov_q),
    .mat_data(mat_data), .io_wdata(io_wdata_q), .wr_data(wr_data), .io_rdata(io_rdata));
endmodule
