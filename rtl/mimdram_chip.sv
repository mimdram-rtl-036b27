// mimdram_chip: I/O logic of one MIMDRAM DRAM chip around its PuD subarray.
//
// Every command on the shared command bus reaches all chips. The chip id
// register (loaded from chip_id_strap while in reset) and the chip select /
// mat identifier logic turn the bus's logical mat range into this chip's
// physical range. Command meaning:
//   PRE      precharge the mats of `range` in this chip
//   PRE_ENQ  the same, and enqueue `range` in the mat queue
//   ACT_DEQ  activate `row` in the mats of the range at the mat queue head,
//            and dequeue it
//   ACT_ENQ  as ACT_DEQ, and enqueue `range` for the next ACT (on DDR4 pins
//            the range follows in the second cycle; here both ride together)
//   RD, WR   column read / write of column group `col` in the mats of
//            `range`; WR with gbmov takes data from the neighbouring global
//            sense-amplifier set, RD with hff_hold keeps HFF enable high
// Every chip enqueues an entry for every enqueue command, with sel = 0 when
// none of its mats is in the range, so all chips' queues stay in step.
// The mat queue, the enqueue/dequeue command forms and the chip select logic
// follow the paper; letting a PRE close only the mats of its range, and
// carrying a range with RD/WR, are this design's choices.
module mimdram_chip
  import mimdram_pkg::*;
#(
  parameter int unsigned MATS   = 16,
  parameter int unsigned ROWS   = 1024,
  parameter int unsigned COLS   = 512,
  parameter int unsigned QDEPTH = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [CHIP_W-1:0]        chip_id_strap,
  input  dram_cmd_t                cmd,
  input  logic [MATS*HFF_BITS-1:0] io_wdata,
  output logic [MATS*HFF_BITS-1:0] io_rdata,
  output logic [MATS-1:0]          mat_open,
  output logic                     queue_empty
);
  logic [CHIP_W-1:0] chip_id_q;
  logic              cs_sel;
  logic [PMAT_W-1:0] cs_begin, cs_end;
  pmat_range_t       q_head, q_push_entry;
  logic              q_push, q_pop, q_full;
  logic              is_act, is_pre;
  pmat_range_t       target;

  always_ff @(posedge clk)
    if (!rst_n) chip_id_q <= chip_id_strap;

  chip_select_mat_id u_cs (
    .mat_begin(cmd.range.mat_begin), .mat_end(cmd.range.mat_end), .chip_id(chip_id_q),
    .chip_sel(cs_sel), .pmat_begin(cs_begin), .pmat_end(cs_end));

  always_comb begin
    is_act       = (cmd.op == DC_ACT_ENQ) || (cmd.op == DC_ACT_DEQ);
    is_pre       = (cmd.op == DC_PRE) || (cmd.op == DC_PRE_ENQ);
    q_push       = (cmd.op == DC_ACT_ENQ) || (cmd.op == DC_PRE_ENQ);
    q_pop        = is_act;
    q_push_entry = '{sel: cs_sel, pbegin: cs_begin, pend: cs_end};
    target       = is_act ? q_head : q_push_entry;
  end

  mat_queue #(.DEPTH(QDEPTH)) u_q (
    .clk(clk), .rst_n(rst_n), .push(q_push), .push_entry(q_push_entry), .pop(q_pop),
    .head(q_head), .empty(queue_empty), .full(q_full));

  mimdram_subarray #(.MATS(MATS), .ROWS(ROWS), .COLS(COLS)) u_sa (
    .clk(clk), .rst_n(rst_n), .act(is_act), .pre(is_pre),
    .rd(cmd.op == DC_RD), .wr(cmd.op == DC_WR), .row(cmd.row), .col(cmd.col),
    .gbmov(cmd.gbmov), .hff_hold(cmd.hff_hold),
    .sel(target.sel && (cmd.op != DC_NOP)), .pmat_begin(target.pbegin), .pmat_end(target.pend),
    .io_wdata(io_wdata), .io_rdata(io_rdata), .mat_open(mat_open));

  a_act_has_range: assert property (@(posedge clk) disable iff (!rst_n) is_act |-> !queue_empty);
endmodule
