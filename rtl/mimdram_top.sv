// mimdram_top: a MIMDRAM system, memory-controller side and DRAM module.
//
// CPU side: a bbop arrives with the mat label the compiler gave it and the
// issuing process ID; the mat translation table replaces the label by its
// mat range (a miss drops the bbop and pulses bbop_miss) and the bbop enters
// the control unit, which schedules it onto the mats and drives the command
// bus. DRAM side: CHIPS MIMDRAM chips on the shared command bus, each with
// one PuD subarray of MATS mats (ROWS x COLS cells each), so the module has
// CHIPS*MATS mats; chip c answers to logical mats c*MATS .. c*MATS+MATS-1.
// The data bus is CHIPS*MATS*4 bits: four bits per mat, chip c on bits
// [c*MATS*4 +: MATS*4]. Regular memory traffic (loading operands, reading
// results, what the transposition unit would do) enters through the host
// command port, which has priority on the bus.
// Defaults are the evaluated configuration: 8 chips, 16 mats per chip,
// 1 K rows and 512 columns per mat, 8 engines, 1024-entry bbop buffer,
// 8-entry mat queues.
module mimdram_top
  import mimdram_pkg::*;
#(
  parameter int unsigned CHIPS     = 8,
  parameter int unsigned MATS      = 16,
  parameter int unsigned ROWS      = 1024,
  parameter int unsigned COLS      = 512,
  parameter int unsigned N_PE      = 8,
  parameter int unsigned BUF_DEPTH = 1024,
  parameter int unsigned QDEPTH    = 8,
  parameter int unsigned MTT_ENTRIES = 512
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // bbop dispatch from the CPU (range field ignored; label and pid used)
  input  logic                           bbop_valid,
  input  bbop_t                          bbop,
  input  logic [7:0]                     bbop_label,
  input  logic [15:0]                    bbop_pid,
  output logic                           bbop_ready,
  output logic                           bbop_miss,
  // mat translation table fill (OS)
  input  logic                           mtt_wr_en,
  input  logic [15:0]                    mtt_wr_pid,
  input  logic [7:0]                     mtt_wr_label,
  input  mat_range_t                     mtt_wr_range,
  // regular memory requests
  input  logic                           host_req,
  input  dram_cmd_t                      host_cmd,
  output logic                           host_gnt,
  input  logic [CHIPS*MATS*HFF_BITS-1:0] host_wdata,
  output logic [CHIPS*MATS*HFF_BITS-1:0] host_rdata,
  // completion and observation
  output logic [N_PE-1:0]                done_valid,
  output logic [TAG_W-1:0]               done_tag [N_PE],
  output logic [N_PE-1:0]                pe_busy,
  output dram_cmd_t                      dram_cmd,
  output logic [CHIPS*MATS-1:0]          mat_open
);
  logic       hit;
  mat_range_t rng;
  bbop_t      bb_tr;
  logic       cu_ready;
  logic [CHIPS*MATS-1:0] bitmap;
  logic [CHIPS-1:0] qempty;

  mat_translation_table #(.ENTRIES(MTT_ENTRIES)) u_mtt (
    .clk(clk), .rst_n(rst_n), .wr_en(mtt_wr_en), .wr_pid(mtt_wr_pid), .wr_label(mtt_wr_label),
    .wr_range(mtt_wr_range), .lk_pid(bbop_pid), .lk_label(bbop_label), .lk_hit(hit), .lk_range(rng));

  always_comb begin
    bb_tr       = bbop;
    bb_tr.range = rng;
  end
  assign bbop_ready = cu_ready;
  assign bbop_miss  = bbop_valid && !hit;

  mimdram_control_unit #(.N_PE(N_PE), .BUF_DEPTH(BUF_DEPTH), .QDEPTH(QDEPTH),
                         .MODULE_MATS(CHIPS*MATS), .ROWS(ROWS)) u_cu (
    .clk(clk), .rst_n(rst_n), .bbop_valid(bbop_valid && hit), .bbop(bb_tr), .bbop_ready(cu_ready),
    .host_req(host_req), .host_cmd(host_cmd), .host_gnt(host_gnt), .dram_cmd(dram_cmd),
    .done_valid(done_valid), .done_tag(done_tag), .pe_busy(pe_busy), .mat_bitmap(bitmap));

  for (genvar c = 0; c < CHIPS; c++) begin : g_chip
    mimdram_chip #(.MATS(MATS), .ROWS(ROWS), .COLS(COLS), .QDEPTH(QDEPTH)) u_chip (
      .clk(clk), .rst_n(rst_n), .chip_id_strap(CHIP_W'(c)), .cmd(dram_cmd),
      .io_wdata(host_wdata[c*MATS*HFF_BITS +: MATS*HFF_BITS]),
      .io_rdata(host_rdata[c*MATS*HFF_BITS +: MATS*HFF_BITS]),
      .mat_open(mat_open[c*MATS +: MATS]), .queue_empty(qempty[c]));
  end

  initial assert (CHIPS * MATS == (1 << LMAT_W) && MATS == (1 << PMAT_W))
    else $error("the 14-bit mat range encoding needs CHIPS*MATS = 128 and MATS = 16");
endmodule
