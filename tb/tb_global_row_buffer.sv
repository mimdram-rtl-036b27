// tb_global_row_buffer: random per-set reads from the mats and writes from
// the I/O bus or (gbmov) from the neighbouring set, against sense-amplifier
// sets modelled in the testbench; checks io_rdata and the data driven into
// the mats every cycle.
module tb_global_row_buffer;
  import mimdram_pkg::*;
  localparam int M = 16;
  logic clk = 0, rst_n = 0;
  logic [M-1:0] rd, wr;
  logic gbmov;
  logic [M-1:0][3:0] md, wdo, model, exp_wd;
  logic [M*4-1:0] iow, ior;
  int checks = 0, failures = 0, moves = 0;

  global_row_buffer #(.MATS(M)) dut (.clk(clk), .rst_n(rst_n), .rd(rd), .wr(wr), .gbmov(gbmov),
    .mat_data(md), .io_wdata(iow), .wr_data(wdo), .io_rdata(ior));
  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rd = '0; wr = '0; gbmov = 0; md = '0; iow = '0; model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      @(negedge clk);
      md = {$urandom, $urandom}; iow = {$urandom, $urandom};
      rd = 16'($urandom) & 16'($urandom);
      wr = 16'($urandom) & ~rd;
      gbmov = $urandom % 2;
      for (int i = 0; i < M; i++) exp_wd[i] = (gbmov && i > 0) ? model[i-1] : iow[i*4 +: 4];
      #1;
      checks++;
      if (wdo !== exp_wd) failures++;
      if (gbmov && wr[15:1] != 0) moves++;
      @(posedge clk); #1;
      for (int i = 0; i < M; i++)
        if (rd[i]) model[i] = md[i];
        else if (wr[i]) model[i] = exp_wd[i];
      checks++;
      if (ior !== model) failures++;
    end
    checks++;
    if (moves == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
