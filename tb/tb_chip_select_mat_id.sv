// tb_chip_select_mat_id: exhaustive check of the chip select / mat
// identifier logic. For every chip id and every logical range with
// begin <= end, the expected answer is computed by listing the mats of the
// range that fall into the chip (mats chip*16 .. chip*16+15) and taking the
// first and last of them.
module tb_chip_select_mat_id;
  import mimdram_pkg::*;
  logic [6:0] b, e;
  logic [2:0] cid;
  logic       sel;
  logic [3:0] pb, pe;
  int checks = 0, failures = 0;

  chip_select_mat_id dut (.mat_begin(b), .mat_end(e), .chip_id(cid),
                          .chip_sel(sel), .pmat_begin(pb), .pmat_end(pe));

  initial begin
    #10_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < 8; c++)
      for (int bi = 0; bi < 128; bi++)
        for (int ei = bi; ei < 128; ei++) begin
          int first, last;
          first = -1; last = -1;
          for (int m = 0; m < 16; m++)
            if (c*16 + m >= bi && c*16 + m <= ei) begin
              if (first < 0) first = m;
              last = m;
            end
          cid = 3'(c); b = 7'(bi); e = 7'(ei);
          #1;
          checks++;
          if (sel !== (first >= 0)) failures++;
          else if (sel && (pb != 4'(first) || pe != 4'(last))) begin
            failures++;
            if (failures < 5) $display("mismatch chip %0d [%0d,%0d]: %0d..%0d", c, bi, ei, pb, pe);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
