// tb_local_row_decoder: checks every row address against the decoder table
// written out here by row name (T0..T3, DCC0, DCC1; '~' marks the negated
// wordline). Data and C rows must raise exactly their own wordline.
module tb_local_row_decoder;
  import mimdram_pkg::*;
  localparam int ROWS = 1024;
  logic [9:0] row;
  wl_t wl [3];
  int checks = 0, failures = 0;
  // physical rows: T0..T3 = ROWS-16..ROWS-13, DCC0 = ROWS-12, DCC1 = ROWS-11
  // encoded as row offset from ROWS-16 (0..5), +8 for negated, -1 for none
  int tbl [16][3] = '{
    '{0,-1,-1}, '{1,-1,-1}, '{2,-1,-1}, '{3,-1,-1}, '{4,-1,-1}, '{12,-1,-1}, '{5,-1,-1}, '{13,-1,-1},
    '{0,1,2}, '{1,4,5}, '{2,3,12}, '{0,1,-1}, '{2,3,-1}, '{1,2,3}, '{4,1,2}, '{5,0,3}};

  local_row_decoder #(.ROWS(ROWS)) dut (.row(row), .wl(wl));

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int r = 0; r < ROWS; r++) begin
      row = 10'(r);
      #1;
      checks++;
      if (r < ROWS - 16) begin
        if (!(wl[0].v && !wl[0].neg && wl[0].prow == 10'(r) && !wl[1].v && !wl[2].v)) failures++;
      end else begin
        for (int k = 0; k < 3; k++) begin
          int x;
          x = tbl[r - (ROWS - 16)][k];
          if (x < 0) begin
            if (wl[k].v) failures++;
          end else if (!(wl[k].v && wl[k].neg == (x >= 8) &&
                         wl[k].prow == 10'(ROWS - 16 + (x % 8)))) begin
            failures++;
            $display("B%0d slot %0d wrong", r - (ROWS - 16), k);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
