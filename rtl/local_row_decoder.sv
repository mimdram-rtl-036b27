// local_row_decoder: maps a mat-local row address to up to three physical
// wordlines, so that one ACT can open one row, two rows or three rows at once
// (triple-row activation, TRA).
//
// Address map (ROWS = 1024 by default):
//   0 .. ROWS-19     data (D) rows, one wordline each
//   ROWS-18, ROWS-17 C0 and C1 (constant rows)
//   ROWS-16 + k      B-group address Bk, k = 0..15:
//     B0 T0   B1 T1   B2 T2   B3 T3   B4 DCC0   B5 !DCC0   B6 DCC1   B7 !DCC1
//     B8 T0,T1,T2         B9 T1,DCC0,DCC1     B10 T2,T3,!DCC0
//     B11 T0,T1           B12 T2,T3           B13 T1,T2,T3
//     B14 DCC0,T1,T2      B15 DCC1,T0,T3
// Physical rows: data rows keep their address; C0, C1, T0..T3, DCC0, DCC1
// follow at ROWS-18 .. ROWS-11. "!DCCx" drives the negated wordline of the
// dual-contact cell row, which reads and writes the complement.
// That the B rows sit behind a decoder able to raise three wordlines follows
// the paper (after Ambit); the table itself is this design's choice, made so
// the full adder of the bit-serial ADD needs only the triples B8, B9, B10.
// Combinational.
module local_row_decoder
  import mimdram_pkg::*;
#(
  parameter int unsigned ROWS = 1024
) (
  input  logic [ROW_W-1:0] row,
  output wl_t              wl [3]
);
  localparam int unsigned B_BASE = ROWS - 16;
  localparam int unsigned P_T0 = ROWS - 16;
  localparam int unsigned P_T1 = ROWS - 15;
  localparam int unsigned P_T2 = ROWS - 14;
  localparam int unsigned P_T3 = ROWS - 13;
  localparam int unsigned P_D0 = ROWS - 12;  // DCC0
  localparam int unsigned P_D1 = ROWS - 11;  // DCC1

  function automatic wl_t w(int unsigned r, logic neg);
    wl_t x;
    x.v = 1'b1; x.neg = neg; x.prow = ROW_W'(r);
    return x;
  endfunction

  always_comb begin
    wl[0] = '0; wl[1] = '0; wl[2] = '0;
    if (32'(row) < B_BASE) begin
      wl[0] = w(32'(row), 1'b0);   // D rows and C0/C1
    end else begin
      unique case (4'(32'(row) - B_BASE))
        4'd0:  wl[0] = w(P_T0, 1'b0);
        4'd1:  wl[0] = w(P_T1, 1'b0);
        4'd2:  wl[0] = w(P_T2, 1'b0);
        4'd3:  wl[0] = w(P_T3, 1'b0);
        4'd4:  wl[0] = w(P_D0, 1'b0);
        4'd5:  wl[0] = w(P_D0, 1'b1);
        4'd6:  wl[0] = w(P_D1, 1'b0);
        4'd7:  wl[0] = w(P_D1, 1'b1);
        4'd8:  begin wl[0] = w(P_T0, 1'b0); wl[1] = w(P_T1, 1'b0); wl[2] = w(P_T2, 1'b0); end
        4'd9:  begin wl[0] = w(P_T1, 1'b0); wl[1] = w(P_D0, 1'b0); wl[2] = w(P_D1, 1'b0); end
        4'd10: begin wl[0] = w(P_T2, 1'b0); wl[1] = w(P_T3, 1'b0); wl[2] = w(P_D0, 1'b1); end
        4'd11: begin wl[0] = w(P_T0, 1'b0); wl[1] = w(P_T1, 1'b0); end
        4'd12: begin wl[0] = w(P_T2, 1'b0); wl[1] = w(P_T3, 1'b0); end
        4'd13: begin wl[0] = w(P_T1, 1'b0); wl[1] = w(P_T2, 1'b0); wl[2] = w(P_T3, 1'b0); end
        4'd14: begin wl[0] = w(P_D0, 1'b0); wl[1] = w(P_T1, 1'b0); wl[2] = w(P_T2, 1'b0); end
        default: begin wl[0] = w(P_D1, 1'b0); wl[1] = w(P_T0, 1'b0); wl[2] = w(P_T3, 1'b0); end
      endcase
    end
  end

  initial assert (ROWS >= 32 && ROWS <= (1 << ROW_W)) else $error("ROWS out of range");
endmodule
