// tb_mat_selector: exhaustive check of the matline decoder against a loop
// that marks the mats between begin and end.
module tb_mat_selector;
  import mimdram_pkg::*;
  logic sel;
  logic [3:0] pb, pe;
  logic [15:0] ml, exp_ml;
  int checks = 0, failures = 0;

  mat_selector #(.MATS(16)) dut (.sel(sel), .pmat_begin(pb), .pmat_end(pe), .matline(ml));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 2; s++)
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          sel = s[0]; pb = 4'(i); pe = 4'(j);
          exp_ml = '0;
          if (s == 1) for (int m = i; m <= j; m++) exp_ml[m] = 1'b1;
          #1;
          checks++;
          if (ml !== exp_ml) failures++;
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
