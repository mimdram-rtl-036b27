// tb_mimdram_subarray: drives the subarray (16 mats, 64 rows, 32 column
// groups) directly with physical mat ranges. Checks that
//   - ACT/PRE/RD/WR touch only the mats of their range (mat_open, and data
//     written in one range not appearing in another),
//   - mats of different ranges keep different rows open at the same time
//     (fine-grained activation), each range reading back its own row,
//   - GB-MOV: RD in mats 0..3 then WR with gbmov in mats 1..4 moves each
//     4-bit group one mat to the right,
//   - LC-MOV: RD with hff_hold, PRE, ACT of another row, WR moves a column
//     group to another row and column of the same mat,
//   - RD data appear exactly two cycles after the RD.
module tb_mimdram_subarray;
  import mimdram_pkg::*;
  localparam int M = 16;
  logic clk = 0, rst_n = 0;
  logic act, pre, rd, wr, gbmov, hold, sel;
  logic [ROW_W-1:0] row;
  logic [COL_W-1:0] col;
  logic [PMAT_W-1:0] pb, pe;
  logic [M*4-1:0] iow, ior;
  logic [M-1:0] mo;
  int checks = 0, failures = 0;

  mimdram_subarray #(.MATS(M), .ROWS(64), .COLS(32)) dut (.clk(clk), .rst_n(rst_n), .act(act),
    .pre(pre), .rd(rd), .wr(wr), .row(row), .col(col), .gbmov(gbmov), .hff_hold(hold), .sel(sel),
    .pmat_begin(pb), .pmat_end(pe), .io_wdata(iow), .io_rdata(ior), .mat_open(mo));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic c, string s);
    checks++;
    if (!c) begin failures++; $display("fail: %s", s); end
  endtask

  function automatic logic [M-1:0] rmask(int b, int e);
    logic [M-1:0] m = '0;
    for (int i = b; i <= e; i++) m[i] = 1'b1;
    return m;
  endfunction

  // one command, then idle cycles so it has fully taken effect
  task automatic issue(string op, int b, int e, int r = 0, int c = 0, logic g = 0, logic h = 0);
    @(negedge clk);
    act = op == "ACT"; pre = op == "PRE"; rd = op == "RD"; wr = op == "WR";
    sel = 1; pb = 4'(b); pe = 4'(e); row = 10'(r); col = 7'(c); gbmov = g; hold = h;
    @(negedge clk);
    {act, pre, rd, wr, gbmov, hold, sel} = '0;
    repeat (2) @(negedge clk);
  endtask

  // read column group c of mats b..e and return io_rdata (sampled 2 cycles after RD)
  task automatic rd_col(int b, int e, int c, output logic [M*4-1:0] d);
    @(negedge clk);
    rd = 1; sel = 1; pb = 4'(b); pe = 4'(e); col = 7'(c);
    @(negedge clk); rd = 0; sel = 0;
    @(negedge clk);
    d = ior;
    @(negedge clk);
  endtask

  logic [M*4-1:0] d, pat_a, pat_b, got;

  initial begin
    {act, pre, rd, wr, gbmov, hold, sel} = '0; row = '0; col = '0; pb = '0; pe = '0; iow = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    pat_a = 64'hA5C3_1E87_F00D_BEEF; pat_b = 64'h1234_5678_9ABC_DEF0;
    // two ranges open different rows at once
    issue("ACT", 0, 5, 3);
    chk(mo == rmask(0, 5), "ACT opens only mats 0..5");
    issue("ACT", 6, 15, 9);
    chk(mo == '1, "second range opened, first still open");
    iow = pat_a; issue("WR", 0, 15, 0, 2);   // mats 0..5 -> row 3, mats 6..15 -> row 9
    issue("PRE", 6, 15);
    chk(mo == rmask(0, 5), "PRE closes only mats 6..15");
    issue("ACT", 6, 15, 3);
    iow = pat_b; issue("WR", 6, 15, 0, 2);  // row 3 of mats 6..15
    issue("PRE", 0, 15);
    chk(mo == '0, "all closed");
    // row 9 of mats 6..15 holds pat_a; row 3 holds pat_a in 0..5 and pat_b in 6..15
    issue("ACT", 0, 15, 3);
    rd_col(0, 15, 2, d);
    chk(d == {pat_b[63:24], pat_a[23:0]}, "row 3 per-range contents");
    issue("PRE", 0, 15);
    issue("ACT", 6, 15, 9);
    rd_col(6, 15, 2, d);
    chk(d[63:24] == pat_a[63:24], "row 9 of mats 6..15");
    // RD latency: data not there one cycle after RD, there after two
    @(negedge clk); rd = 1; sel = 1; pb = 4'd6; pe = 4'd15; col = 7'd2;
    @(negedge clk); rd = 0; sel = 0; iow = '0;
    @(negedge clk); got = ior;
    chk(got[63:24] == pat_a[63:24], "RD data after two cycles");
    issue("PRE", 0, 15);
    // GB-MOV: mats 0..3 column group 2 of row 3 -> mats 1..4 column group 2 of row 5
    issue("ACT", 0, 3, 3);
    issue("ACT", 4, 4, 5);
    issue("RD", 0, 3, 0, 2);
    issue("PRE", 1, 3);
    issue("ACT", 1, 3, 5);
    issue("WR", 1, 4, 0, 2, 1'b1);
    issue("PRE", 0, 15);
    issue("ACT", 1, 4, 5);
    rd_col(1, 4, 2, d);
    chk(d[19:4] == pat_a[15:0], "GB-MOV shifts each group one mat right");
    issue("PRE", 0, 15);
    // LC-MOV in mat 7: row 3 column 2 -> row 11 column 6
    issue("ACT", 7, 7, 3);
    issue("RD", 7, 7, 0, 2, 1'b0, 1'b1);
    issue("PRE", 7, 7);
    issue("ACT", 7, 7, 11);
    iow = '0;
    issue("WR", 7, 7, 0, 6);
    rd_col(7, 7, 6, d);
    chk(d[31:28] == pat_b[31:28], "LC-MOV moved the group inside mat 7");
    issue("PRE", 0, 15);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
