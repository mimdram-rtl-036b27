// tb_mat_queue: random pushes and pops (including both in one cycle,
// as an ACT-enqueue does) against a queue kept by the testbench; checks the
// head, empty and full flags every cycle and that 8 entries fit.
module tb_mat_queue;
  import mimdram_pkg::*;
  logic clk = 0, rst_n = 0;
  logic push, pop, empty, full;
  pmat_range_t din, head;
  pmat_range_t model[$];
  int checks = 0, failures = 0;

  mat_queue #(.DEPTH(8)) dut (.clk(clk), .rst_n(rst_n), .push(push), .push_entry(din),
                              .pop(pop), .head(head), .empty(empty), .full(full));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int maxfill = 0;
    push = 0; pop = 0; din = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      checks++;
      if (empty !== (model.size() == 0) || full !== (model.size() == 8)) failures++;
      if (model.size() > 0) begin
        checks++;
        if (head !== model[0]) failures++;
      end
      din  = pmat_range_t'($urandom);
      pop  = (model.size() > 0) && ($urandom % 100 < (t < 1500 ? 35 : 60));
      push = ((model.size() < 8) || pop) && ($urandom % 100 < 55);
      @(posedge clk);
      #1;
      if (pop) void'(model.pop_front());
      if (push) model.push_back(din);
      if (model.size() > maxfill) maxfill = model.size();
    end
    checks++;
    if (maxfill != 8) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
