// tb_mimdram_top_full: one complete operation on the full-size system, with
// every parameter of mimdram_top at its default (8 chips x 16 mats, 1024
// rows x 512 columns per mat, 8 engines, 1024-entry bbop buffer).
// The testbench maps two labels to mats 0..3 and 64..67 (chips 0 and 4),
// loads two 4-bit operands (rows 0..3 and 8..11, 512 lanes per mat) into
// all mats through the host port, issues a 4-bit ADD to each label, waits
// for both completions and reads the sums (rows 16..20) back, checking all
// 4 x 512 x 2 lanes. It also checks that the two ADDs ran at the same time
// and that each took 8n+2 = 34 operations (ACT_DEQs on its range).
module tb_mimdram_top_full;
  import mimdram_pkg::*;
  localparam int R = 1024, C = 512, NCG = C / 4, NM = 128, NPE = 8;
  logic clk = 0, rst_n = 0;
  logic bv, brdy, bmiss, mwe, hreq, hgnt;
  bbop_t bb;
  logic [7:0] blabel, mlabel;
  logic [15:0] bpid, mpid;
  mat_range_t mrange;
  dram_cmd_t hcmd, bus;
  logic [NM*4-1:0] hwd, hrd;
  logic [NPE-1:0] dv, pbusy;
  logic [TAG_W-1:0] dtag [NPE];
  logic [NM-1:0] mopen;

  mimdram_top dut (
    .clk(clk), .rst_n(rst_n), .bbop_valid(bv), .bbop(bb), .bbop_label(blabel), .bbop_pid(bpid),
    .bbop_ready(brdy), .bbop_miss(bmiss), .mtt_wr_en(mwe), .mtt_wr_pid(mpid), .mtt_wr_label(mlabel),
    .mtt_wr_range(mrange), .host_req(hreq), .host_cmd(hcmd), .host_gnt(hgnt), .host_wdata(hwd),
    .host_rdata(hrd), .done_valid(dv), .done_tag(dtag), .pe_busy(pbusy), .dram_cmd(bus),
    .mat_open(mopen));
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [C-1:0] mem [NM][21];   // software model of rows 0..20
  int max_busy = 0, n_done = 0, deq_a = 0, deq_b = 0;
  logic host_on_bus = 0;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; $display("fail: %s", s); end
  endtask

  always @(posedge clk) if (rst_n) begin
    host_on_bus <= hgnt;
    if ($countones(pbusy) > max_busy) max_busy = $countones(pbusy);
    n_done += $countones(dv);
    if (!host_on_bus && bus.op == DC_ACT_DEQ) begin
      if (bus.range.mat_begin == 7'd0 && bus.range.mat_end == 7'd3) deq_a++;
      if (bus.range.mat_begin == 7'd64 && bus.range.mat_end == 7'd67) deq_b++;
    end
  end

  task automatic host(dram_op_e op, int row, int col, int gap);
    @(negedge clk);
    hcmd = DRAM_NOP; hcmd.op = op; hcmd.row = 10'(row); hcmd.col = 7'(col);
    hcmd.range = '{mat_begin: 7'd0, mat_end: 7'(NM - 1)};
    hreq = 1;
    @(posedge clk);
    while (!hgnt) @(posedge clk);
    #1 hreq = 0;
    repeat (gap) @(negedge clk);
  endtask

  task automatic host_write_row(int r);
    host(DC_PRE_ENQ, 0, 0, 16);
    host(DC_ACT_DEQ, r, 0, 39);
    for (int g = 0; g < NCG; g++) begin
      for (int m = 0; m < NM; m++) hwd[m*4 +: 4] = mem[m][r][g*4 +: 4];
      host(DC_WR, 0, g, 3);
    end
    host(DC_PRE, 0, 0, 16);
  endtask

  task automatic host_read_row(int r, output logic [C-1:0] got [NM]);
    host(DC_PRE_ENQ, 0, 0, 16);
    host(DC_ACT_DEQ, r, 0, 39);
    for (int g = 0; g < NCG; g++) begin
      host(DC_RD, 0, g, 3);
      for (int m = 0; m < NM; m++) got[m][g*4 +: 4] = hrd[m*4 +: 4];
    end
    host(DC_PRE, 0, 0, 16);
  endtask

  task automatic map(int label, int b, int e);
    @(negedge clk);
    mwe = 1; mpid = 16'd7; mlabel = 8'(label); mrange = '{mat_begin: 7'(b), mat_end: 7'(e)};
    @(negedge clk); mwe = 0;
  endtask

  task automatic issue(int label, int tag);
    @(negedge clk);
    bb = '0; bb.op = OP_ADD; bb.tag = 10'(tag); bb.nbits = 6'd4;
    bb.src1_row = 10'd0; bb.src2_row = 10'd8; bb.dst_row = 10'd16;
    bv = 1; blabel = 8'(label); bpid = 16'd7;
    @(posedge clk);
    while (!brdy) @(posedge clk);
    #1 bv = 0;
  endtask

  logic [C-1:0] got [NM];

  initial begin
    bv = 0; bb = '0; blabel = '0; bpid = '0; mwe = 0; mpid = '0; mlabel = '0; mrange = '0;
    hreq = 0; hcmd = DRAM_NOP; hwd = '0;
    for (int m = 0; m < NM; m++)
      for (int r = 0; r < 21; r++)
        for (int w = 0; w < C / 32; w++) mem[m][r][w*32 +: 32] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    map(1, 0, 3); map(2, 64, 67);
    for (int r = 0; r < 4; r++) begin host_write_row(r); host_write_row(8 + r); end
    issue(1, 1); issue(2, 2);
    for (int m = 0; m < NM; m++)
      if (m <= 3 || (m >= 64 && m <= 67))
        for (int l = 0; l < C; l++) begin
          logic [4:0] a, s, y;
          a = '0; s = '0;
          for (int i = 0; i < 4; i++) begin a[i] = mem[m][i][l]; s[i] = mem[m][8 + i][l]; end
          y = a + s;
          for (int i = 0; i < 5; i++) mem[m][16 + i][l] = y[i];
        end
    wait (n_done == 2);
    repeat (20) @(negedge clk);
    for (int r = 16; r <= 20; r++) begin
      host_read_row(r, got);
      for (int m = 0; m < NM; m++)
        if (m <= 3 || (m >= 64 && m <= 67)) begin
          checks++;
          if (got[m] !== mem[m][r]) begin
            failures++;
            $display("fail: mat %0d row %0d", m, r);
          end
        end
    end
    chk(max_busy == 2, "both ADDs ran at once");
    chk(deq_a == 34 && deq_b == 34, "8n+2 operations each");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
