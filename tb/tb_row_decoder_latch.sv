// tb_row_decoder_latch: random matline/ACT/PRE/row stimulus; the latch must
// pass a strobe one cycle later only when its matline was high, and keep
// the row of the last selected ACT while other rows pass on the global
// wordline.
module tb_row_decoder_latch;
  import mimdram_pkg::*;
  logic clk = 0, rst_n = 0;
  logic ml, act, pre, act_q, pre_q;
  logic [9:0] row, row_q, exp_row;
  int checks = 0, failures = 0;

  row_decoder_latch dut (.clk(clk), .rst_n(rst_n), .matline(ml), .gwl_row(row), .act(act),
                         .pre(pre), .row_q(row_q), .act_q(act_q), .pre_q(pre_q));
  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic e_act, e_pre;
    ml = 0; act = 0; pre = 0; row = '0; exp_row = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      ml = $urandom % 2; act = $urandom % 2; pre = !act && ($urandom % 2); row = 10'($urandom);
      e_act = ml & act; e_pre = ml & pre;
      if (ml & act) exp_row = row;
      @(posedge clk); #1;
      checks++;
      if (act_q !== e_act || pre_q !== e_pre || row_q !== exp_row) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
