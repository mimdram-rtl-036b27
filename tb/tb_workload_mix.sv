// tb_workload_mix: a multi-programmed mix run on the full-size system (all
// mimdram_top parameters at their defaults). Eight applications, each with
// the vectorization factor of one evaluated loop, issue an 8-bit addition
// at the same time: x264 (320 elements, 1 mat), heartwall (2601, 6 mats),
// doitgen and fdtd-apml (1000, 2 mats each), and gemm, 2mm, 3mm and pca
// (4000, 8 mats each): 43 mats of the 128. The operands are random 8-bit
// values in rows 0..7 and 8..15 of every mat; the sums (9 bits) land in rows
// 16..24. The test checks that all eight run at once on the eight engines,
// that each issues 8n+2 = 66 operations on its own range, and every lane of
// every mat of every range. Only the addition part of those loops is run;
// their multiplications, divisions and reductions are not built.
module tb_workload_mix;
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
  logic [C-1:0] mem [NM][25];   // software model of rows 0..24
  int max_busy = 0, n_done = 0;
  int deq [8];
  int lo [8] = '{0, 8, 14, 16, 18, 26, 34, 42};
  int hi [8] = '{0, 13, 15, 17, 25, 33, 41, 49};
  logic host_on_bus = 0;

  initial begin
    repeat (400000) @(posedge clk);
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
    if (!host_on_bus && bus.op == DC_ACT_DEQ)
      for (int k = 0; k < 8; k++)
        if (32'(bus.range.mat_begin) == lo[k] && 32'(bus.range.mat_end) == hi[k]) deq[k]++;
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
    bb = '0; bb.op = OP_ADD; bb.tag = 10'(tag); bb.nbits = 6'd8;
    bb.src1_row = 10'd0; bb.src2_row = 10'd8; bb.dst_row = 10'd16;
    bv = 1; blabel = 8'(label); bpid = 16'd7;
    @(posedge clk);
    while (!brdy) @(posedge clk);
    #1 bv = 0;
  endtask

  logic [C-1:0] got [NM];

  function automatic logic in_mix(int m);
    for (int k = 0; k < 8; k++) if (m >= lo[k] && m <= hi[k]) return 1'b1;
    return 1'b0;
  endfunction

  initial begin
    bv = 0; bb = '0; blabel = '0; bpid = '0; mwe = 0; mpid = '0; mlabel = '0; mrange = '0;
    hreq = 0; hcmd = DRAM_NOP; hwd = '0;
    for (int k = 0; k < 8; k++) deq[k] = 0;
    for (int m = 0; m < NM; m++)
      for (int r = 0; r < 25; r++)
        for (int w = 0; w < C / 32; w++) mem[m][r][w*32 +: 32] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    for (int k = 0; k < 8; k++) map(k + 1, lo[k], hi[k]);
    for (int r = 0; r < 16; r++) host_write_row(r);
    for (int k = 0; k < 8; k++) issue(k + 1, k + 1);
    for (int m = 0; m < NM; m++)
      if (in_mix(m))
        for (int l = 0; l < C; l++) begin
          logic [8:0] a, s, y;
          a = '0; s = '0;
          for (int i = 0; i < 8; i++) begin a[i] = mem[m][i][l]; s[i] = mem[m][8 + i][l]; end
          y = a + s;
          for (int i = 0; i < 9; i++) mem[m][16 + i][l] = y[i];
        end
    wait (n_done == 8);
    repeat (20) @(negedge clk);
    for (int r = 16; r <= 24; r++) begin
      host_read_row(r, got);
      for (int m = 0; m < NM; m++)
        if (in_mix(m)) begin
          checks++;
          if (got[m] !== mem[m][r]) begin
            failures++;
            $display("fail: mat %0d row %0d", m, r);
          end
        end
    end
    chk(max_busy == 8, "all eight applications ran at once");
    for (int k = 0; k < 8; k++) chk(deq[k] == 66, $sformatf("range %0d: 8n+2 operations", k));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
