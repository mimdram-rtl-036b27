// tb_mimdram_control_unit: five bbops through the whole control unit
// (16-entry buffer, 8 engines): ADD n=2 on mats [0,1], [10,11], [20,21],
// COPY n=3 on [40,60], and ADD n=1 on [1,1], which overlaps the first.
// Checks that the first four run at the same time on different engines,
// that the fifth starts only after the first has finished, that every
// bbop's tag comes back once, that each range sees its micro-program's
// command counts (ADD: 8n+2 ACT_DEQs), and, with a shadow mat queue on the
// command bus, that every ACT_DEQ finds its own range at the queue head.
// A host PRE_ENQ/ACT_DEQ/PRE burst in the middle must be served too.
module tb_mimdram_control_unit;
  import mimdram_pkg::*;
  localparam int NPE = 8;
  logic clk = 0, rst_n = 0;
  logic bv, br, hreq, hgnt;
  bbop_t bb;
  dram_cmd_t hcmd, bus;
  logic [NPE-1:0] dv, pbusy;
  logic [TAG_W-1:0] dtag [NPE];
  logic [127:0] bitmap;
  int checks = 0, failures = 0;
  int max_busy = 0, host_done = 0;
  int deq_cnt [5];
  longint done_at [5], first_at [5];
  int done_seen [5];
  longint cyc = 0;
  mat_range_t shq[$];
  mat_range_t rg [5];

  mimdram_control_unit #(.N_PE(NPE), .BUF_DEPTH(16)) dut (.clk(clk), .rst_n(rst_n), .bbop_valid(bv),
    .bbop(bb), .bbop_ready(br), .host_req(hreq), .host_cmd(hcmd), .host_gnt(hgnt), .dram_cmd(bus),
    .done_valid(dv), .done_tag(dtag), .pe_busy(pbusy), .mat_bitmap(bitmap));
  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; $display("fail: %s", s); end
  endtask

  function automatic int which(mat_range_t r);
    for (int i = 0; i < 5; i++) if (r == rg[i] || (i == 4 && r == rg[4])) return i;
    return -1;
  endfunction

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if ($countones(pbusy) > max_busy) max_busy = $countones(pbusy);
    for (int p = 0; p < NPE; p++) if (dv[p]) begin
      if (dtag[p] < 5) begin done_seen[int'(dtag[p])]++; done_at[int'(dtag[p])] = cyc; end
    end
    if (bus.op != DC_NOP && bus.row != 10'd777) begin
      int w;
      w = which(bus.range);
      if (w >= 0 && first_at[w] < 0) first_at[w] = cyc;
      if (bus.op == DC_ACT_DEQ && w >= 0) deq_cnt[w]++;
    end
    if (bus.op == DC_ACT_ENQ || bus.op == DC_ACT_DEQ) begin
      checks++;
      if (shq.size() == 0) begin failures++; $display("fail: ACT with empty queue"); end
      else begin
        if (bus.op == DC_ACT_DEQ && shq[0] != bus.range) begin
          failures++; $display("fail: ACT_DEQ range is not the queue head");
        end
        void'(shq.pop_front());
      end
    end
    if (bus.op == DC_ACT_ENQ || bus.op == DC_PRE_ENQ) shq.push_back(bus.range);
    if (bus.op == DC_PRE && bus.row == 10'd777) host_done++;
  end

  function automatic bbop_t mk(int t, bbop_op_e op, int n, int b, int e);
    bbop_t x = '0;
    x.op = op; x.tag = 10'(t); x.nbits = 6'(n);
    x.range = '{mat_begin: 7'(b), mat_end: 7'(e)};
    x.src1_row = 10'd0; x.src2_row = 10'd8; x.dst_row = 10'd16;
    return x;
  endfunction

  task automatic host(dram_op_e op);
    @(negedge clk);
    hcmd = DRAM_NOP; hcmd.op = op; hcmd.row = 10'd777;
    hcmd.range = '{mat_begin: 7'd100, mat_end: 7'd100};
    hreq = 1;
    do @(posedge clk); while (!hgnt);
    #1 hreq = 0;
    repeat (40) @(negedge clk);
  endtask

  initial begin
    bv = 0; bb = '0; hreq = 0; hcmd = DRAM_NOP;
    for (int i = 0; i < 5; i++) begin deq_cnt[i] = 0; done_seen[i] = 0; first_at[i] = -1; end
    rg[0] = '{7'd0, 7'd1}; rg[1] = '{7'd10, 7'd11}; rg[2] = '{7'd20, 7'd21};
    rg[3] = '{7'd40, 7'd60}; rg[4] = '{7'd1, 7'd1};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    bv = 1; bb = mk(0, OP_ADD, 2, 0, 1);  @(negedge clk);
    bb = mk(1, OP_ADD, 2, 10, 11);        @(negedge clk);
    bb = mk(4, OP_ADD, 1, 1, 1);          @(negedge clk);
    bb = mk(2, OP_ADD, 2, 20, 21);        @(negedge clk);
    bb = mk(3, OP_COPY, 3, 40, 60);       @(negedge clk);
    bv = 0;
    repeat (300) @(negedge clk);
    host(DC_PRE_ENQ); host(DC_ACT_DEQ); host(DC_PRE);
    wait (done_seen[4] == 1);
    repeat (50) @(negedge clk);
    chk(max_busy >= 4, "four engines busy at once");
    for (int i = 0; i < 5; i++) chk(done_seen[i] == 1, $sformatf("tag %0d done once", i));
    chk(deq_cnt[0] == 18 && deq_cnt[1] == 18 && deq_cnt[2] == 18, "ADD n=2: 8n+2 operations");
    chk(deq_cnt[3] == 3, "COPY n=3: three AAPs");
    chk(deq_cnt[4] == 10, "ADD n=1: 10 operations");
    chk(first_at[4] > done_at[0], "overlapping bbop waits for its mats");
    chk(first_at[2] < done_at[0] && first_at[3] < done_at[0], "independent bbops overlap");
    chk(host_done == 1, "host burst served");
    chk(bitmap == '0 && pbusy == '0, "all mats and engines free");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
