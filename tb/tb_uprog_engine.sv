// tb_uprog_engine: runs single bbops through one engine with the grant tied
// to the request (no contention) and logs every granted command with its
// cycle. Checks, against the paper's counts and latencies:
//   - ADD n = 4: 8n+2 operations (ACT_DEQs), 6n+2 of them AAPs (ACT_ENQs),
//     2n APs, all on the bbop's range; ACT->ACT and ACT->PRE gaps = tRAS,
//     PRE->ACT = tRP; consecutive operations overlap PRE with the next
//     range enqueue (PRE_ENQ) so no extra PREs appear,
//   - SUB n = 3: 9n+2 operations, starting from C1 and inverting B,
//   - COPY: one AAP per row,
//   - GB-MOV: first ACT to PRE = 2 + tRAS + tRELOC + tWR, then tRP, i.e.
//     the paper's tRAS + tRELOC + tWR + tRP plus the 2-cycle range transfer,
//   - LC-MOV: first ACT to closing PRE + tRP = 2(tRAS + tRP) + tRELOC + tWR
//     (+1 for the HFF-hold RD),
//   - with random grant stalls the same sequence is sent and no gap is ever
//     shorter than its timing.
module tb_uprog_engine;
  import mimdram_pkg::*;
  localparam int TRAS = 39, TRP = 16, TWR = 18, TREL = 4, R = 1024;
  logic clk = 0, rst_n = 0;
  logic start, busy, req, gnt, done, stall;
  bbop_t bb, cur;
  dram_cmd_t cmd;
  int checks = 0, failures = 0;
  longint cyc = 0;
  dram_cmd_t log_c[$];
  longint    log_t[$];
  longint    done_t;

  uprog_engine #(.ROWS(R)) dut (.clk(clk), .rst_n(rst_n), .start(start), .bbop(bb), .busy(busy),
    .req(req), .cmd(cmd), .gnt(gnt), .done(done), .cur_bbop(cur));
  always #5 clk = ~clk;
  assign gnt = req && !stall;

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (gnt) begin log_c.push_back(cmd); log_t.push_back(cyc); end

  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; $display("fail @%0t: %s", $time, s); end
  endtask

  task automatic run(bbop_t b);
    log_c.delete(); log_t.delete();
    @(negedge clk); bb = b; start = 1;
    @(negedge clk); start = 0;
    wait (done); done_t = cyc; @(negedge clk);
  endtask

  function automatic int cnt(dram_op_e op);
    int n = 0;
    foreach (log_c[i]) if (log_c[i].op == op) n++;
    return n;
  endfunction

  function automatic int min_gap(dram_op_e op);
    case (op)
      DC_ACT_ENQ, DC_ACT_DEQ: return TRAS;
      default: return TRP;
    endcase
  endfunction

  bbop_t b;
  int ok, ng, d;

  initial begin
    start = 0; bb = '0; stall = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;

    // ADD, 4 bits, mats 3..5
    b = '0; b.op = OP_ADD; b.nbits = 6'd4; b.range = '{mat_begin: 7'd3, mat_end: 7'd5};
    b.src1_row = 10'd0; b.src2_row = 10'd8; b.dst_row = 10'd16;
    run(b);
    chk(cnt(DC_ACT_DEQ) == 8 * 4 + 2, "ADD: 8n+2 operations");
    chk(cnt(DC_ACT_ENQ) == 6 * 4 + 2, "ADD: AAP count");
    chk(cnt(DC_PRE) == 1 && cnt(DC_PRE_ENQ) == 8 * 4 + 2, "ADD: PRE overlapped with enqueue");
    ok = 1;
    foreach (log_c[i]) if (log_c[i].range != b.range) ok = 0;
    chk(ok == 1, "ADD: every command on the bbop range");
    ok = 1;
    for (int i = 1; i < log_c.size(); i++) begin
      d = int'(log_t[i] - log_t[i-1]);
      if (i == 1) begin if (d != 1) ok = 0; end
      else if (d != min_gap(log_c[i-1].op)) ok = 0;
    end
    chk(ok == 1, "ADD: exact tRAS/tRP gaps");
    chk(log_c[1].op == DC_ACT_ENQ && log_c[1].row == 10'(R - 18) && log_c[2].row == 10'(R - 10),
        "ADD: starts with AAP C0 -> DCC1");
    chk(log_c[$].op == DC_PRE && done_t - log_t[$] == TRP + 1, "ADD: done the cycle after tRP of the last PRE");
    chk(log_t[$] - log_t[0] + TRP == 1 + (6 * 4 + 2) * (2 * TRAS + TRP) + 2 * 4 * (TRAS + TRP),
        "ADD: total latency");

    // SUB, 3 bits: 9n+2 operations, carry initialised from C1
    b = '0; b.op = OP_SUB; b.nbits = 6'd3; b.range = '{mat_begin: 7'd7, mat_end: 7'd9};
    b.src1_row = 10'd0; b.src2_row = 10'd8; b.dst_row = 10'd16;
    run(b);
    chk(cnt(DC_ACT_DEQ) == 9 * 3 + 2 && cnt(DC_ACT_ENQ) == 7 * 3 + 2, "SUB: 9n+2 operations");
    chk(log_c[1].row == 10'(R - 17) && log_c[4].row == 10'd8 && log_c[5].row == 10'(R - 12)
        && log_c[7].row == 10'(R - 11) && log_c[8].row == 10'(R - 8), "SUB: C1 -> DCC1, B -> DCC0, !DCC0 -> T0..T2");

    // COPY 3 rows
    b = '0; b.op = OP_COPY; b.nbits = 6'd3; b.range = '{mat_begin: 7'd20, mat_end: 7'd40};
    b.src1_row = 10'd5; b.dst_row = 10'd50;
    run(b);
    chk(cnt(DC_ACT_ENQ) == 3 && cnt(DC_ACT_DEQ) == 3, "COPY: one AAP per row");
    chk(log_c[1].row == 10'd5 && log_c[2].row == 10'd50 && log_c[7].row == 10'd7 && log_c[8].row == 10'd52,
        "COPY: row addresses");

    // GB-MOV: 2 rows x 3 column groups, mat 5 -> mat 6
    b = '0; b.op = OP_MOV; b.nbits = 6'd2; b.ncols = 8'd3; b.range = '{mat_begin: 7'd5, mat_end: 7'd6};
    b.src1_row = 10'd1; b.dst_row = 10'd2; b.src_col = 7'd10; b.dst_col = 7'd20;
    run(b);
    ng = 0; ok = 1;
    foreach (log_c[i]) if (log_c[i].op == DC_WR) begin
      ng++;
      if (!log_c[i].gbmov || log_c[i].range.mat_begin != 7'd6) ok = 0;
    end
    chk(ng == 6 && ok == 1, "GB-MOV: six WRs with gbmov into mat 6");
    ok = 1;
    foreach (log_c[i]) if (log_c[i].op == DC_ACT_ENQ) begin
      if (log_c[i+4].op != DC_PRE || log_t[i+4] - log_t[i] != 2 + TRAS + TREL + TWR) ok = 0;
      if (i + 5 < log_c.size() && log_t[i+5] - log_t[i+4] != TRP) ok = 0;
    end
    chk(ok == 1, "GB-MOV: tRAS + tRELOC + tWR + tRP (+2)");

    // LC-MOV: 1 row x 2 column groups inside mat 9
    b = '0; b.op = OP_MOV; b.nbits = 6'd1; b.ncols = 8'd2; b.range = '{mat_begin: 7'd9, mat_end: 7'd9};
    b.src1_row = 10'd3; b.dst_row = 10'd4; b.src_col = 7'd0; b.dst_col = 7'd1;
    run(b);
    chk(cnt(DC_RD) == 2 && log_c[2].hff_hold && cnt(DC_WR) == 2, "LC-MOV: RD with HFF hold, WR");
    chk(log_t[6] - log_t[1] + TRP == 2 * (TRAS + TRP) + TREL + TWR + 1, "LC-MOV latency");
    chk(done_t - log_t[1] == 2 * (2 * (TRAS + TRP) + TREL + TWR + 1) + 1, "LC-MOV: two back to back");

    // ADD with random stalls: same commands, no gap too short
    fork
      begin
        b = '0; b.op = OP_ADD; b.nbits = 6'd2; b.range = '{mat_begin: 7'd0, mat_end: 7'd0};
        b.src1_row = 10'd0; b.src2_row = 10'd8; b.dst_row = 10'd16;
        run(b);
      end
      begin
        while (!done) begin @(negedge clk); stall = ($urandom % 3) == 0; end
        stall = 0;
      end
    join
    chk(cnt(DC_ACT_DEQ) == 18, "stalled ADD: 8n+2 operations");
    ok = 1;
    for (int i = 2; i < log_c.size(); i++)
      if (log_t[i] - log_t[i-1] < min_gap(log_c[i-1].op)) ok = 0;
    chk(ok == 1, "stalled ADD: timing never violated");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
