// tb_mat_scoreboard: random allocations of free ranges and random frees,
// against a 128-bit bitmap kept by the testbench; checks q_free for random
// query ranges and the bitmap every cycle.
module tb_mat_scoreboard;
  import mimdram_pkg::*;
  logic clk = 0, rst_n = 0;
  mat_range_t q, s;
  logic q_free, set_en;
  logic [127:0] clr, bitmap, model;
  int checks = 0, failures = 0, allocs = 0;

  mat_scoreboard #(.MODULE_MATS(128)) dut (.clk(clk), .rst_n(rst_n), .q_range(q), .q_free(q_free),
    .set_en(set_en), .set_range(s), .clr_mask(clr), .bitmap(bitmap));
  always #5 clk = ~clk;

  function automatic logic [127:0] m_of(mat_range_t r);
    logic [127:0] m = '0;
    for (int i = r.mat_begin; i <= r.mat_end; i++) m[i] = 1'b1;
    return m;
  endfunction

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    set_en = 0; clr = '0; q = '0; s = '0; model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      q.mat_begin = 7'($urandom); q.mat_end = q.mat_begin + 7'($urandom % 8);
      if (q.mat_end < q.mat_begin) q.mat_end = 7'd127;
      #1;
      checks++;
      if (q_free !== ((model & m_of(q)) == '0)) failures++;
      clr = ($urandom % 4 == 0) ? model & m_of('{mat_begin: 7'($urandom), mat_end: 7'd127}) : '0;
      s = q;
      set_en = q_free && ($urandom % 2);
      if (set_en) allocs++;
      @(posedge clk); #1;
      model = (model & ~clr) | (set_en ? m_of(s) : '0);
      set_en = 0; clr = '0;
      checks++;
      if (bitmap !== model) failures++;
    end
    checks++;
    if (allocs < 100) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
