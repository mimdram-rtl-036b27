// tb_cmd_arbiter: four model engines and a host port compete for the bus.
// Engine p loops over PRE_ENQ(range p), ACT_ENQ, ACT_DEQ, PRE with random
// pauses; the host sends random PRE_ENQ + ACT_DEQ pairs. A shadow mat queue
// on the bus checks that every ACT's range (the queue head the chips would
// use) is its own engine's range, that the queue never exceeds its depth,
// that nothing is granted the cycle after an ACT_ENQ, that the host wins
// whenever it is eligible, and that every engine finishes its loops
// (round-robin, no deadlock).
module tb_cmd_arbiter;
  import mimdram_pkg::*;
  localparam int N = 4, QD = 4, LOOPS = 60;
  logic clk = 0, rst_n = 0;
  logic [N-1:0] req, gnt;
  dram_cmd_t pc [N];
  logic hreq, hgnt;
  dram_cmd_t hcmd, bus;
  int checks = 0, failures = 0;
  int step [N+1];
  int pause [N+1];
  int loops [N+1];
  int stalls = 0;
  mat_range_t shq[$];
  dram_op_e last_op;

  cmd_arbiter #(.N_PE(N), .QDEPTH(QD)) dut (.clk(clk), .rst_n(rst_n), .req(req), .pe_cmd(pc),
    .gnt(gnt), .host_req(hreq), .host_cmd(hcmd), .host_gnt(hgnt), .bus(bus));
  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mat_range_t rng(int p);
    return '{mat_begin: 7'(p * 10), mat_end: 7'(p * 10 + 3)};
  endfunction
  // engine p's command in loop step s; row carries the engine id
  function automatic dram_cmd_t ecmd(int p, int s);
    dram_cmd_t c = DRAM_NOP;
    c.range = rng(p); c.row = 10'(p);
    case (s)
      0: c.op = DC_PRE_ENQ;
      1: c.op = DC_ACT_ENQ;
      2: c.op = DC_ACT_DEQ;
      default: c.op = DC_PRE;
    endcase
    return c;
  endfunction

  always_comb begin
    for (int p = 0; p < N; p++) begin
      pc[p]  = ecmd(p, step[p]);
      req[p] = rst_n && pause[p] == 0 && loops[p] < LOOPS;
    end
    hcmd = ecmd(N, step[N] == 0 ? 0 : 2);
    hreq = rst_n && pause[N] == 0 && loops[N] < LOOPS;
  end

  // model engines advance on grants
  always @(posedge clk) begin
    if (rst_n) begin
      for (int p = 0; p <= N; p++) begin
        if (p < N ? gnt[p] : hgnt) begin
          if (p < N) step[p] = (step[p] + 1) % 4;
          else step[p] = (step[p] + 1) % 2;
          if (step[p] == 0) loops[p]++;
          pause[p] = $urandom % 4;
        end else if (pause[p] > 0) pause[p]--;
      end
    end
  end

  // checks on the grant side; the command now on the bus is not yet in shq
  always @(negedge clk) if (rst_n) begin
    mat_range_t q[$];
    q = shq;
    if (bus.op == DC_ACT_ENQ || bus.op == DC_ACT_DEQ) if (q.size() > 0) void'(q.pop_front());
    if (bus.op == DC_ACT_ENQ || bus.op == DC_PRE_ENQ) q.push_back(bus.range);
    checks++;
    if (hreq && !hgnt && bus.op != DC_ACT_ENQ
        && !(hcmd.op == DC_ACT_DEQ && (q.size() == 0 || q[0] != rng(N)))
        && !(hcmd.op == DC_PRE_ENQ && q.size() >= QD)) begin
      failures++; $display("fail: host not preferred");
    end
    if (req != 0 && gnt == 0 && !hgnt) stalls++;
  end

  // shadow queue on the bus
  always @(posedge clk) if (rst_n) begin
    if (bus.op != DC_NOP && last_op == DC_ACT_ENQ) begin
      failures++; $display("fail: grant right after ACT_ENQ");
    end
    if (bus.op == DC_ACT_ENQ || bus.op == DC_ACT_DEQ) begin
      checks++;
      if (shq.size() == 0 || shq[0] != rng(int'(bus.row))) begin
        failures++; $display("fail: ACT of %0d got another range", bus.row);
      end
      if (shq.size() > 0) void'(shq.pop_front());
    end
    if (bus.op == DC_ACT_ENQ || bus.op == DC_PRE_ENQ) begin
      shq.push_back(bus.range);
      checks++;
      if (shq.size() > QD) begin failures++; $display("fail: queue overflow"); end
    end
    last_op <= bus.op;
  end

  initial begin
    for (int p = 0; p <= N; p++) begin step[p] = 0; pause[p] = 0; loops[p] = 0; end
    last_op = DC_NOP;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wait (loops[0] >= LOOPS && loops[1] >= LOOPS && loops[2] >= LOOPS && loops[3] >= LOOPS && loops[4] >= LOOPS);
    repeat (3) @(posedge clk);
    checks++;
    if (stalls == 0) begin failures++; $display("fail: ordering never held anyone back"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
