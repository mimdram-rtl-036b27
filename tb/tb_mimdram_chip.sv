// tb_mimdram_chip: one chip (id 2, logical mats 32..47; 64 rows, 32 column
// groups) driven through the command bus encoding. Checks
//   - the chip id register and mat identifier logic: ranges of other chips
//     open nothing; a range straddling chips opens only the local part,
//   - the mat queue: PRE_ENQ / ACT_ENQ enqueue, every ACT dequeues, and an
//     entry of another chip (sel = 0) is still enqueued and popped,
//   - an ACT_ENQ's own target is the queue head while its range is enqueued
//     for the following ACT (overlapped ACT/range transfer),
//   - RD/WR with a logical range, including data round trip.
module tb_mimdram_chip;
  import mimdram_pkg::*;
  localparam int M = 16;
  logic clk = 0, rst_n = 0;
  dram_cmd_t cmd;
  logic [M*4-1:0] iow, ior;
  logic [M-1:0] mo;
  logic qe;
  int checks = 0, failures = 0;

  mimdram_chip #(.MATS(M), .ROWS(64), .COLS(32)) dut (.clk(clk), .rst_n(rst_n),
    .chip_id_strap(3'd2), .cmd(cmd), .io_wdata(iow), .io_rdata(ior), .mat_open(mo),
    .queue_empty(qe));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; $display("fail: %s", s); end
  endtask

  function automatic logic [M-1:0] rmask(int b, int e);
    logic [M-1:0] m = '0;
    for (int i = b; i <= e; i++) m[i] = 1'b1;
    return m;
  endfunction

  task automatic issue(dram_op_e op, int b, int e, int r = 0, int c = 0);
    @(negedge clk);
    cmd = DRAM_NOP;
    cmd.op = op; cmd.range.mat_begin = 7'(b); cmd.range.mat_end = 7'(e);
    cmd.row = 10'(r); cmd.col = 7'(c);
    @(negedge clk);
    cmd = DRAM_NOP;
    repeat (2) @(negedge clk);
  endtask

  logic [M*4-1:0] pat;

  initial begin
    cmd = DRAM_NOP; iow = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    pat = 64'hFEDC_BA98_7654_3210;
    chk(qe, "queue empty after reset");
    // range of chip 5: enqueued, but the ACT opens nothing here
    issue(DC_PRE_ENQ, 80, 90);
    chk(!qe, "foreign range still enqueued");
    issue(DC_ACT_DEQ, 0, 0, 4);
    chk(qe && mo == '0, "ACT popped foreign entry, nothing opened");
    // straddling range 28..35 -> local mats 0..3
    issue(DC_PRE_ENQ, 28, 35);
    issue(DC_ACT_DEQ, 0, 0, 4);
    chk(mo == rmask(0, 3), "straddling range opens mats 0..3");
    iow = pat;
    issue(DC_WR, 28, 35, 0, 5);
    // ACT_ENQ: opens head (mats 8..9, enqueued by PRE_ENQ) and enqueues 44..47
    issue(DC_PRE_ENQ, 40, 41);
    issue(DC_ACT_ENQ, 44, 47, 6);
    chk(mo == (rmask(0, 3) | rmask(8, 9)), "ACT_ENQ activates the head range");
    chk(!qe, "ACT_ENQ left its own range queued");
    issue(DC_ACT_DEQ, 0, 0, 6);
    chk(mo == (rmask(0, 3) | rmask(8, 9) | rmask(12, 15)), "next ACT uses the ACT_ENQ range");
    chk(qe, "queue empty again");
    iow = ~pat;
    issue(DC_WR, 40, 47, 0, 5);
    // PRE of one range keeps the others open
    issue(DC_PRE, 40, 41);
    chk(mo == (rmask(0, 3) | rmask(12, 15)), "PRE closes only its range");
    issue(DC_PRE, 0, 127);
    chk(mo == '0, "PRE of everything");
    // read back: row 4 of mats 0..3 = pat, row 6 of mats 12..15 = ~pat
    issue(DC_PRE_ENQ, 32, 47);
    issue(DC_ACT_DEQ, 0, 0, 4);
    @(negedge clk); cmd.op = DC_RD; cmd.range = '{mat_begin: 7'd32, mat_end: 7'd35}; cmd.col = 7'd5;
    @(negedge clk); cmd = DRAM_NOP;
    @(negedge clk);
    chk(ior[15:0] == pat[15:0], "row 4 read back");
    issue(DC_PRE_ENQ, 32, 47);
    issue(DC_ACT_DEQ, 0, 0, 6);
    @(negedge clk); cmd.op = DC_RD; cmd.range = '{mat_begin: 7'd44, mat_end: 7'd47}; cmd.col = 7'd5;
    @(negedge clk); cmd = DRAM_NOP;
    @(negedge clk);
    chk(ior[63:48] == ~pat[63:48], "row 6 of mats 12..15 read back");
    issue(DC_PRE, 0, 127);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
