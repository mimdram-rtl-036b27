// tb_bbop_buffer: fills a 16-entry buffer, reads entries by index, removes
// them out of order and checks the head skipping the holes, the full flag
// and that pushes after wrap-around land at the right index.
module tb_bbop_buffer;
  import mimdram_pkg::*;
  logic clk = 0, rst_n = 0;
  logic push, ready, remove, rv, empty;
  bbop_t pb, rb;
  logic [3:0] idx, head, tail;
  int checks = 0, failures = 0;

  bbop_buffer #(.DEPTH(16)) dut (.clk(clk), .rst_n(rst_n), .push(push), .push_bbop(pb),
    .push_ready(ready), .rd_idx(idx), .rd_bbop(rb), .rd_valid(rv), .remove(remove),
    .head(head), .tail(tail), .empty(empty));
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

  function automatic bbop_t mkb(int t);
    bbop_t b = '0;
    b.op = OP_ADD; b.tag = 10'(t); b.dst_row = 10'(t * 3);
    return b;
  endfunction

  initial begin
    push = 0; remove = 0; idx = '0; pb = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    chk(empty && ready, "empty after reset");
    for (int i = 0; i < 16; i++) begin
      pb = mkb(100 + i); push = 1;
      @(posedge clk); #1;
      chk(i == 15 ? !ready : ready, "ready while filling");
    end
    push = 0;
    for (int i = 0; i < 16; i++) begin
      idx = 4'(i); #1;
      chk(rv && rb.tag == 10'(100 + i) && rb.dst_row == 10'((100 + i) * 3), "read by index");
    end
    // remove entries 1, 2 (holes behind head), then 0: head must skip to 3
    idx = 4'd1; remove = 1; @(posedge clk); #1;
    idx = 4'd2; @(posedge clk); #1;
    remove = 0;
    chk(head == 0, "head stays on live entry 0");
    idx = 4'd0; remove = 1; @(posedge clk); #1; remove = 0;
    repeat (3) @(posedge clk); #1;
    chk(head == 3, "head skipped holes");
    chk(ready, "room after removal");
    idx = 4'd1; #1; chk(!rv, "removed entry invalid");
    // three pushes wrap into slots 0..2
    for (int i = 0; i < 3; i++) begin pb = mkb(200 + i); push = 1; @(posedge clk); #1; end
    push = 0;
    chk(!ready, "full again");
    for (int i = 0; i < 3; i++) begin idx = 4'(i); #1; chk(rv && rb.tag == 10'(200 + i), "wrapped push"); end
    // drain everything in reverse order
    for (int i = 15; i >= 0; i--) begin idx = 4'(i); #1; if (rv) begin remove = 1; @(posedge clk); #1; remove = 0; end end
    repeat (20) @(posedge clk); #1;
    chk(empty && head == tail, "empty after draining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
