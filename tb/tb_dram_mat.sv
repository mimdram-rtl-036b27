// tb_dram_mat: exercises one mat (64 rows x 32 columns) through its
// command pins and checks every result against values the testbench keeps
// itself: column writes and reads, RowClone (ACT on an open mat), triple-row
// activation giving the bitwise majority and overwriting all three rows,
// NOT through the negated wordline of a dual-contact row, the constant rows
// C0/C1, and the LC-MOV sequence where HFF enable stays high from the RD to
// the WR so the WR writes the HFF contents and ignores its data input.
module tb_dram_mat;
  import mimdram_pkg::*;
  localparam int ROWS = 64, COLS = 32, NCG = COLS / 4;
  localparam int T0 = ROWS - 16, B8 = ROWS - 8, C0 = ROWS - 18, C1 = ROWS - 17;
  logic clk = 0, rst_n = 0;
  logic act, pre, rd, wr, hold, is_open;
  logic [9:0] row;
  logic [6:0] col;
  logic [3:0] wd, cd;
  logic [COLS-1:0] data [16];
  int checks = 0, failures = 0;

  dram_mat #(.ROWS(ROWS), .COLS(COLS)) dut (.clk(clk), .rst_n(rst_n), .act(act), .pre(pre),
    .row(row), .rd(rd), .wr(wr), .col(col), .hff_hold(hold), .wr_data(wd), .col_data(cd),
    .is_open(is_open));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(); @(posedge clk); #1; act = 0; pre = 0; rd = 0; wr = 0; hold = 0; endtask
  task automatic do_act(int r); row = 10'(r); act = 1; step(); endtask
  task automatic do_pre(); pre = 1; step(); endtask
  task automatic do_wr(int c, logic [3:0] d); col = 7'(c); wd = d; wr = 1; step(); endtask
  task automatic do_rd(int c, logic h); col = 7'(c); rd = 1; hold = h; step(); endtask
  task automatic write_row(int r, logic [COLS-1:0] v);
    do_act(r);
    for (int c = 0; c < NCG; c++) do_wr(c, v[c*4 +: 4]);
    do_pre();
  endtask
  // Open row r and compare the whole row buffer with v.
  task automatic check_row(int r, logic [COLS-1:0] v, string what);
    logic [COLS-1:0] got;
    do_act(r);
    for (int c = 0; c < NCG; c++) begin col = 7'(c); #1; got[c*4 +: 4] = cd; end
    do_pre();
    checks++;
    if (got !== v) begin
      failures++;
      $display("%s: row %0d got %h expected %h", what, r, got, v);
    end
  endtask
  task automatic aap(int a, int b); do_act(a); do_act(b); do_pre(); endtask

  initial begin
    logic [COLS-1:0] a, b, c, m;
    act = 0; pre = 0; rd = 0; wr = 0; hold = 0; row = '0; col = '0; wd = '0;
    repeat (2) @(posedge clk);
    rst_n = 1; step();
    for (int i = 0; i < 16; i++) begin data[i] = COLS'($urandom); write_row(i, data[i]); end
    for (int i = 0; i < 16; i++) check_row(i, data[i], "write/read");
    check_row(C0, '0, "C0");
    check_row(C1, '1, "C1");
    // RowClone
    aap(3, 20); check_row(20, data[3], "rowclone");
    check_row(3, data[3], "rowclone source kept");
    // Triple-row activation through B8 = {T0, T1, T2}
    a = data[5]; b = data[6]; c = data[7];
    m = (a & b) | (a & c) | (b & c);
    aap(5, T0); aap(6, T0 + 1); aap(7, T0 + 2);
    aap(B8, 21);
    check_row(21, m, "majority");
    check_row(T0 + 1, m, "TRA overwrites T1");
    // Dual-contact cell: write DCC0 (B4), read !DCC0 (B5)
    aap(9, ROWS - 12); aap(ROWS - 11, 22);
    check_row(22, ~data[9], "not via !DCC0");
    // Copy into the negated wordline (B7 = !DCC1) stores the complement
    aap(10, ROWS - 9); aap(ROWS - 10, 23);
    check_row(23, ~data[10], "copy into !DCC1");
    // LC-MOV: column group 2 of row 11 -> column group 5 of row 12
    do_act(11); do_rd(2, 1'b1); do_pre();
    do_act(12); do_wr(5, ~data[11][2*4 +: 4]); do_pre();
    m = data[12]; m[5*4 +: 4] = data[11][2*4 +: 4];
    check_row(12, m, "lc-mov");
    // HFF enable dropped after that WR: a plain WR takes its data input
    do_act(12); do_wr(5, 4'ha); do_pre();
    m[5*4 +: 4] = 4'ha;
    check_row(12, m, "plain write after lc-mov");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
