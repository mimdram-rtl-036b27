// mimdram_control_unit: the MIMDRAM control unit in the memory controller.
//
// Incoming bbops (already carrying a mat range) are queued in the bbop
// buffer. The mat scheduler picks them first-fit against the mat scoreboard
// and hands each to an idle micro-program engine; up to N_PE engines run at
// once on disjoint mat ranges, and the command arbiter merges their DRAM
// commands (and regular host requests) onto the command bus, one per cycle.
// A finishing engine frees its mats in the scoreboard and raises
// done_valid[i] for one cycle with the bbop's tag in done_tag[i].
// Structure as in the paper's Fig. 7; the host command port stands for the
// rest of the memory controller, which is not built.
module mimdram_control_unit
  import mimdram_pkg::*;
#(
  parameter int unsigned N_PE        = 8,
  parameter int unsigned BUF_DEPTH   = 1024,
  parameter int unsigned QDEPTH      = 8,
  parameter int unsigned MODULE_MATS = 128,
  parameter int unsigned ROWS        = 1024,
  parameter int unsigned T_RAS       = 39,
  parameter int unsigned T_RP        = 16,
  parameter int unsigned T_WR        = 18,
  parameter int unsigned T_RELOC     = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             bbop_valid,
  input  bbop_t            bbop,
  output logic             bbop_ready,
  input  logic             host_req,
  input  dram_cmd_t        host_cmd,
  output logic             host_gnt,
  output dram_cmd_t        dram_cmd,
  output logic [N_PE-1:0]  done_valid,
  output logic [TAG_W-1:0] done_tag [N_PE],
  output logic [N_PE-1:0]  pe_busy,
  output logic [MODULE_MATS-1:0] mat_bitmap
);
  localparam int unsigned AW = $clog2(BUF_DEPTH);

  logic [AW-1:0]   rd_idx, head, tail;
  bbop_t           rd_bbop, disp_bbop;
  logic            rd_valid, remove, buf_empty;
  mat_range_t      q_range;
  logic            q_free, set_en;
  logic [N_PE-1:0] dispatch, req, gnt;
  dram_cmd_t       pe_cmd [N_PE];
  bbop_t           pe_bbop [N_PE];
  logic [MODULE_MATS-1:0] clr_mask;

  bbop_buffer #(.DEPTH(BUF_DEPTH)) u_buf (
    .clk(clk), .rst_n(rst_n), .push(bbop_valid), .push_bbop(bbop), .push_ready(bbop_ready),
    .rd_idx(rd_idx), .rd_bbop(rd_bbop), .rd_valid(rd_valid), .remove(remove),
    .head(head), .tail(tail), .empty(buf_empty));

  mat_scheduler #(.DEPTH(BUF_DEPTH), .N_PE(N_PE)) u_sched (
    .clk(clk), .rst_n(rst_n), .buf_head(head), .buf_tail(tail), .rd_bbop(rd_bbop),
    .rd_valid(rd_valid), .rd_idx(rd_idx), .remove(remove), .q_range(q_range), .q_free(q_free),
    .set_en(set_en), .pe_busy(pe_busy), .restart(done_valid != '0),
    .dispatch(dispatch), .dispatch_bbop(disp_bbop));

  always_comb begin
    clr_mask = '0;
    for (int i = 0; i < N_PE; i++)
      if (done_valid[i])
        for (int m = 0; m < MODULE_MATS; m++)
          if (32'(pe_bbop[i].range.mat_begin) <= m && m <= 32'(pe_bbop[i].range.mat_end))
            clr_mask[m] = 1'b1;
  end

  mat_scoreboard #(.MODULE_MATS(MODULE_MATS)) u_sb (
    .clk(clk), .rst_n(rst_n), .q_range(q_range), .q_free(q_free), .set_en(set_en),
    .set_range(q_range), .clr_mask(clr_mask), .bitmap(mat_bitmap));

  for (genvar i = 0; i < N_PE; i++) begin : g_pe
    uprog_engine #(.ROWS(ROWS), .T_RAS(T_RAS), .T_RP(T_RP), .T_WR(T_WR), .T_RELOC(T_RELOC)) u_pe (
      .clk(clk), .rst_n(rst_n), .start(dispatch[i]), .bbop(disp_bbop), .busy(pe_busy[i]),
      .req(req[i]), .cmd(pe_cmd[i]), .gnt(gnt[i]), .done(done_valid[i]), .cur_bbop(pe_bbop[i]));
    assign done_tag[i] = pe_bbop[i].tag;
  end

  cmd_arbiter #(.N_PE(N_PE), .QDEPTH(QDEPTH)) u_arb (
    .clk(clk), .rst_n(rst_n), .req(req), .pe_cmd(pe_cmd), .gnt(gnt),
    .host_req(host_req), .host_cmd(host_cmd), .host_gnt(host_gnt), .bus(dram_cmd));
endmodule
