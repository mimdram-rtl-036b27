// tb_mat_translation_table: fills the table with (pid, label) -> range
// mappings, checks hits and ranges, misses for pairs never written, and
// that a later mapping with the same hash index replaces the older one.
module tb_mat_translation_table;
  import mimdram_pkg::*;
  logic clk = 0, rst_n = 0;
  logic we, hit;
  logic [15:0] wpid, lpid;
  logic [7:0] wl, ll;
  mat_range_t wr, lr;
  int checks = 0, failures = 0;

  mat_translation_table #(.ENTRIES(512)) dut (.clk(clk), .rst_n(rst_n), .wr_en(we), .wr_pid(wpid),
    .wr_label(wl), .wr_range(wr), .lk_pid(lpid), .lk_label(ll), .lk_hit(hit), .lk_range(lr));
  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic mat_range_t rg(int p, int l);
    mat_range_t r;
    r.mat_begin = 7'(p * 7 + l);
    r.mat_end = r.mat_begin + 7'(l % 5);
    return r;
  endfunction

  initial begin
    we = 0; wpid = '0; wl = '0; wr = '0; lpid = '0; ll = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); lpid = 16'd5; ll = 8'd1; #1;
    checks++; if (hit) failures++;
    // pids 1..3 shifted past the label bits, labels 0..15: distinct indices
    for (int p = 1; p <= 3; p++)
      for (int l = 0; l < 16; l++) begin
        @(negedge clk); we = 1; wpid = 16'(p << 13); wl = 8'(l); wr = rg(p, l);
      end
    @(negedge clk); we = 0;
    for (int p = 1; p <= 3; p++)
      for (int l = 0; l < 16; l++) begin
        lpid = 16'(p << 13); ll = 8'(l); #1;
        checks++;
        if (!hit || lr !== rg(p, l)) failures++;
      end
    lpid = 16'd7 << 13; ll = 8'd3; #1;
    checks++; if (hit) failures++;
    // pid 1<<4 label 3 shares index with pid 1<<13 label 3: replaces it
    @(negedge clk); we = 1; wpid = 16'(1 << 4); wl = 8'd3; wr = rg(4, 3);
    @(negedge clk); we = 0;
    lpid = 16'(1 << 4); ll = 8'd3; #1;
    checks++; if (!hit || lr !== rg(4, 3)) failures++;
    lpid = 16'(1 << 13); ll = 8'd3; #1;
    checks++; if (hit) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
