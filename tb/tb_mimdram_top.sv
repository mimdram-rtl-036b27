// tb_mimdram_top: end-to-end test of the MIMDRAM system at reduced mat size
// (64 rows x 32 columns per mat, 16-entry bbop buffer; 8 chips x 16 mats).
// The testbench plays the OS, the CPU and the regular memory path:
//   1. fills the mat translation table (labels 1..6 -> mat ranges),
//   2. loads random data into rows 0..39 of all 128 mats through the host
//      port (PRE_ENQ, ACT_DEQ, one WR per 4-bit column group, PRE),
//   3. issues bbops by label: ADD (4 bits) on mats 0..3 and on mats 20..23,
//      a COPY on mat 2 that overlaps the first ADD, a COPY on mats 40..47,
//      a GB-MOV from mat 60 to mat 61, an LC-MOV inside mat 70, and one
//      bbop with an unknown label,
//      and a 4-bit SUB on mats 100..103,
//   4. waits for every completion and reads rows 0..39 of all mats back
//      through the host port, checking every lane against a software model.
// Mechanisms counted (a failure if any never happened): translation-table
// hits and miss, engines running concurrently, triple-row activations,
// PRE_ENQ (PRE overlapped with range transfer), ACT_ENQ, GB-MOV writes,
// LC-MOV HFF-hold reads, two ranges open on different rows at once
// (fine-grained activation), the scheduler dispatching a younger bbop past
// a blocked older one, and the arbiter holding an engine back.
// Timing is not checked here (tb_uprog_engine does); the host waits a few
// cycles between its own commands, which the behavioural mats accept.
module tb_mimdram_top;
  import mimdram_pkg::*;
  localparam int R = 64, C = 32, NCG = C / 4, NM = 128, NPE = 8;
  localparam int WATCHDOG = 400000;
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

  mimdram_top #(.ROWS(R), .COLS(C), .BUF_DEPTH(16)) dut (
    .clk(clk), .rst_n(rst_n), .bbop_valid(bv), .bbop(bb), .bbop_label(blabel), .bbop_pid(bpid),
    .bbop_ready(brdy), .bbop_miss(bmiss), .mtt_wr_en(mwe), .mtt_wr_pid(mpid), .mtt_wr_label(mlabel),
    .mtt_wr_range(mrange), .host_req(hreq), .host_cmd(hcmd), .host_gnt(hgnt), .host_wdata(hwd),
    .host_rdata(hrd), .done_valid(dv), .done_tag(dtag), .pe_busy(pbusy), .dram_cmd(bus),
    .mat_open(mopen));
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [C-1:0] mem [NM][R];   // software model of the mats' data rows
  int n_hit = 0, n_miss = 0, max_busy = 0, n_tra = 0, n_preenq = 0, n_actenq = 0;
  int n_gbmov = 0, n_hold = 0, n_split = 0, n_arbstall = 0, n_done = 0;
  longint cyc = 0;
  longint first_cmd [10];
  logic [6:0] lo [10], hi [10];
  logic host_on_bus = 0;

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; $display("fail: %s", s); end
  endtask

  // ---- monitors ----
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    host_on_bus <= hgnt;   // the command on the bus next cycle is the host's
    if ($countones(pbusy) > max_busy) max_busy = $countones(pbusy);
    if (bv && brdy && !bmiss) n_hit++;
    if (bv && bmiss) n_miss++;
    n_done += $countones(dv);
    if (!host_on_bus) begin
      if ((bus.op == DC_ACT_DEQ || bus.op == DC_ACT_ENQ) && 32'(bus.row) >= R - 8) n_tra++;
      if (bus.op == DC_ACT_ENQ) n_actenq++;
      if (bus.op == DC_PRE_ENQ) n_preenq++;
      if (bus.op == DC_WR && bus.gbmov) n_gbmov++;
      if (bus.op == DC_RD && bus.hff_hold) n_hold++;
      for (int t = 1; t <= 6; t++)
        if (first_cmd[t] < 0 && bus.op != DC_NOP && bus.range.mat_begin == lo[t]
            && bus.range.mat_end == hi[t])
          first_cmd[t] = cyc;
    end
    if (mopen[3:0] != 0 && mopen[23:20] != 0) n_split++;
    if (dut.u_cu.req != 0 && dut.u_cu.gnt == 0 && !hgnt) n_arbstall++;
  end

  // ---- host port ----
  task automatic host(dram_op_e op, int row, int col, int b, int e, int gap = 4);
    @(negedge clk);
    hcmd = DRAM_NOP; hcmd.op = op; hcmd.row = 10'(row); hcmd.col = 7'(col);
    hcmd.range = '{mat_begin: 7'(b), mat_end: 7'(e)};
    hreq = 1;
    @(posedge clk);
    while (!hgnt) @(posedge clk);
    #1 hreq = 0;
    repeat (gap) @(negedge clk);
  endtask

  task automatic host_write_row(int r);
    host(DC_PRE_ENQ, 0, 0, 0, NM - 1);
    host(DC_ACT_DEQ, r, 0, 0, NM - 1);
    for (int g = 0; g < NCG; g++) begin
      for (int m = 0; m < NM; m++) hwd[m*4 +: 4] = mem[m][r][g*4 +: 4];
      host(DC_WR, 0, g, 0, NM - 1);
    end
    host(DC_PRE, 0, 0, 0, NM - 1);
  endtask

  task automatic host_read_row(int r, output logic [C-1:0] got [NM]);
    host(DC_PRE_ENQ, 0, 0, 0, NM - 1);
    host(DC_ACT_DEQ, r, 0, 0, NM - 1);
    for (int g = 0; g < NCG; g++) begin
      host(DC_RD, 0, g, 0, NM - 1);
      for (int m = 0; m < NM; m++) got[m][g*4 +: 4] = hrd[m*4 +: 4];
    end
    host(DC_PRE, 0, 0, 0, NM - 1);
  endtask

  task automatic map(int label, int b, int e);
    @(negedge clk);
    mwe = 1; mpid = 16'd42; mlabel = 8'(label); mrange = '{mat_begin: 7'(b), mat_end: 7'(e)};
    lo[label] = 7'(b); hi[label] = 7'(e);
    @(negedge clk); mwe = 0;
  endtask

  task automatic issue(int label, bbop_t x);
    @(negedge clk);
    bv = 1; bb = x; blabel = 8'(label); bpid = 16'd42;
    @(posedge clk);
    while (!brdy) @(posedge clk);
    #1 bv = 0;
  endtask

  function automatic bbop_t mk(bbop_op_e op, int tag, int n, int s1, int s2, int d);
    bbop_t x = '0;
    x.op = op; x.tag = 10'(tag); x.nbits = 6'(n);
    x.src1_row = 10'(s1); x.src2_row = 10'(s2); x.dst_row = 10'(d);
    return x;
  endfunction

  // expected result of ADD 4 bits rows 0..3 + rows 8..11 -> rows 16..20
  task automatic model_add(int b, int e);
    for (int m = b; m <= e; m++)
      for (int l = 0; l < C; l++) begin
        logic [4:0] a, s, y;
        a = '0; s = '0;
        for (int i = 0; i < 4; i++) begin a[i] = mem[m][i][l]; s[i] = mem[m][8 + i][l]; end
        y = a + s;
        for (int i = 0; i < 5; i++) mem[m][16 + i][l] = y[i];
      end
  endtask

  // expected result of SUB 4 bits rows 0..3 - rows 8..11 -> rows 16..19,
  // row 20 = 1 when there was no borrow
  task automatic model_sub(int b, int e);
    for (int m = b; m <= e; m++)
      for (int l = 0; l < C; l++) begin
        logic [4:0] a, s, y;
        a = '0; s = '0;
        for (int i = 0; i < 4; i++) begin a[i] = mem[m][i][l]; s[i] = mem[m][8 + i][l]; end
        y = a + {1'b0, ~s[3:0]} + 5'd1;
        for (int i = 0; i < 5; i++) mem[m][16 + i][l] = y[i];
      end
  endtask

  logic [C-1:0] got [NM];
  bbop_t x;

  initial begin
    bv = 0; bb = '0; blabel = '0; bpid = '0; mwe = 0; mpid = '0; mlabel = '0; mrange = '0;
    hreq = 0; hcmd = DRAM_NOP; hwd = '0;
    for (int t = 0; t < 10; t++) begin first_cmd[t] = -1; lo[t] = '0; hi[t] = '0; end
    for (int m = 0; m < NM; m++) for (int r = 0; r < R; r++) mem[m][r] = $urandom;
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(negedge clk);
    // 1. OS: mat translation table
    map(1, 0, 3); map(2, 20, 23); map(3, 40, 47); map(4, 60, 61); map(5, 70, 70); map(6, 2, 2);
    map(7, 100, 103);
    // 2. operands into rows 0..11 of every mat (and known data in rows 12..39)
    for (int r = 0; r < 40; r++) host_write_row(r);
    $display("loaded at cycle %0d", cyc);
    // 3. bbops (tag = label); label 6 overlaps label 1 and is queued before label 3
    x = mk(OP_ADD, 1, 4, 0, 8, 16);  issue(1, x);
    x = mk(OP_ADD, 2, 4, 0, 8, 16);  issue(2, x);
    x = mk(OP_COPY, 6, 2, 0, 0, 36); issue(6, x);
    x = mk(OP_COPY, 3, 4, 0, 0, 24); issue(3, x);
    x = mk(OP_MOV, 4, 2, 0, 0, 30); x.src_col = 7'd1; x.dst_col = 7'd5; x.ncols = 8'd2; issue(4, x);
    x = mk(OP_MOV, 5, 2, 8, 0, 32); x.src_col = 7'd0; x.dst_col = 7'd3; x.ncols = 8'd2; issue(5, x);
    x = mk(OP_SUB, 7, 4, 0, 8, 16);  issue(7, x);
    x = mk(OP_ADD, 9, 1, 0, 0, 0);   issue(9, x);   // unknown label: dropped
    // software model of the same work
    model_add(0, 3); model_add(20, 23); model_sub(100, 103);
    mem[2][36] = mem[2][0]; mem[2][37] = mem[2][1];
    for (int m = 40; m <= 47; m++) for (int i = 0; i < 4; i++) mem[m][24 + i] = mem[m][i];
    for (int i = 0; i < 2; i++) for (int g = 0; g < 2; g++)
      mem[61][30 + i][(5 + g) * 4 +: 4] = mem[60][i][(1 + g) * 4 +: 4];
    for (int i = 0; i < 2; i++) for (int g = 0; g < 2; g++)
      mem[70][32 + i][(3 + g) * 4 +: 4] = mem[70][8 + i][g * 4 +: 4];
    // 4. wait for all six completions, then read back
    wait (n_done == 7);
    $display("computed at cycle %0d", cyc);
    repeat (20) @(negedge clk);
    chk(pbusy == '0 && dut.bitmap == '0, "engines idle, scoreboard clear");
    for (int r = 0; r < 40; r++) begin
      host_read_row(r, got);
      for (int m = 0; m < NM; m++) begin
        checks++;
        if (got[m] !== mem[m][r]) begin
          failures++;
          if (failures < 20) $display("fail: mat %0d row %0d got %h exp %h", m, r, got[m], mem[m][r]);
        end
      end
    end
    $display("hits %0d miss %0d max_busy %0d tra %0d pre_enq %0d act_enq %0d gbmov %0d hold %0d split %0d arbstall %0d",
             n_hit, n_miss, max_busy, n_tra, n_preenq, n_actenq, n_gbmov, n_hold, n_split, n_arbstall);
    chk(n_hit == 7, "translation hits");
    chk(n_miss >= 1, "translation miss");
    chk(max_busy >= 4, "engines concurrent");
    chk(n_tra > 0, "triple-row activations");
    chk(n_preenq > 0, "PRE_ENQ overlap");
    chk(n_actenq > 0, "ACT_ENQ");
    chk(n_gbmov == 4, "GB-MOV writes");
    chk(n_hold == 4, "LC-MOV HFF-hold reads");
    chk(n_split > 0, "two ranges open at once");
    chk(first_cmd[3] >= 0 && first_cmd[6] > first_cmd[3], "younger bbop dispatched past blocked one");
    chk(n_arbstall > 0, "arbiter held an engine back");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
