// tb_mat_scheduler: the scheduler with a real bbop buffer (16 entries) and
// mat scoreboard, and two model engines. bbops A [0,3], B [2,5] (overlaps
// A), C [10,12] are queued; then D [20,20]. First fit must dispatch A, skip
// B (mats busy), dispatch C (out of order), hold D while both engines are
// busy, and after A finishes dispatch B (now the oldest that fits) before D.
// Also checks that a dispatched range is marked busy in the scoreboard, that
// each bbop goes to an idle engine, and that every bbop is dispatched once.
module tb_mat_scheduler;
  import mimdram_pkg::*;
  localparam int D = 16, NPE = 2;
  logic clk = 0, rst_n = 0;
  logic push, ready, rv, remove, empty, q_free, set_en, restart;
  bbop_t pb, rb, db;
  logic [3:0] idx, head, tail;
  mat_range_t qr;
  logic [127:0] clr, bitmap;
  logic [NPE-1:0] busy, disp;
  bbop_t held [NPE];
  int checks = 0, failures = 0;
  string order = "";

  bbop_buffer #(.DEPTH(D)) u_buf (.clk(clk), .rst_n(rst_n), .push(push), .push_bbop(pb),
    .push_ready(ready), .rd_idx(idx), .rd_bbop(rb), .rd_valid(rv), .remove(remove),
    .head(head), .tail(tail), .empty(empty));
  mat_scoreboard u_sb (.clk(clk), .rst_n(rst_n), .q_range(qr), .q_free(q_free), .set_en(set_en),
    .set_range(qr), .clr_mask(clr), .bitmap(bitmap));
  mat_scheduler #(.DEPTH(D), .N_PE(NPE)) dut (.clk(clk), .rst_n(rst_n), .buf_head(head),
    .buf_tail(tail), .rd_bbop(rb), .rd_valid(rv), .rd_idx(idx), .remove(remove), .q_range(qr),
    .q_free(q_free), .set_en(set_en), .pe_busy(busy), .restart(restart), .dispatch(disp),
    .dispatch_bbop(db));
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; $display("fail: %s", s); end
  endtask

  // model engines: take the dispatched bbop
  always @(posedge clk) if (rst_n) begin
    for (int p = 0; p < NPE; p++) if (disp[p]) begin
      if (busy[p]) begin failures++; $display("fail: dispatch to busy engine"); end
      busy[p] <= 1'b1; held[p] <= db;
      order = {order, string'(8'(db.tag))};
    end
  end

  function automatic bbop_t mk(byte t, int b, int e);
    bbop_t x = '0;
    x.op = OP_ADD; x.tag = 10'(t); x.nbits = 6'd1;
    x.range = '{mat_begin: 7'(b), mat_end: 7'(e)};
    return x;
  endfunction

  task automatic put(bbop_t x);
    @(negedge clk); push = 1; pb = x;
    @(negedge clk); push = 0;
  endtask

  task automatic finish_pe(int p);
    @(negedge clk);
    for (int m = 0; m < 128; m++)
      clr[m] = m >= held[p].range.mat_begin && m <= held[p].range.mat_end;
    restart = 1;
    @(posedge clk); #1;
    busy[p] = 1'b0; clr = '0; restart = 0;
  endtask

  initial begin
    push = 0; pb = '0; clr = '0; restart = 0; busy = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    put(mk("A", 0, 3)); put(mk("B", 2, 5)); put(mk("C", 10, 12));
    repeat (40) @(negedge clk);
    chk(order == "AC", "A and C dispatched, B skipped");
    chk(bitmap[3:0] == 4'hF && bitmap[12:10] == 3'h7 && bitmap[5:4] == 0, "scoreboard marks A and C");
    put(mk("D", 20, 20));
    repeat (40) @(negedge clk);
    chk(order == "AC", "D waits for an engine");
    finish_pe(0);   // A done
    repeat (40) @(negedge clk);
    chk(order == "ACB", "B dispatched first after A frees its mats");
    chk(bitmap[5:2] == 4'hF && bitmap[1:0] == 0, "scoreboard: A cleared, B set");
    finish_pe(1);   // C done
    repeat (40) @(negedge clk);
    chk(order == "ACBD", "D dispatched");
    chk(empty, "buffer empty");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
