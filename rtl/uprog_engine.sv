// uprog_engine: one micro-program (uProgram) processing engine of the
// MIMDRAM control unit.
//
// An engine takes one bbop from the mat scheduler, expands it into the DRAM
// command sequence of its micro-program and sends the commands through the
// command arbiter (req/gnt, one command per grant), keeping the DRAM timing
// between consecutive commands of its own sequence. When the last command's
// timing has elapsed it pulses `done` so its mats are freed and the CPU is
// told. Engines only ever wait on their own timing and on the arbiter, so
// eight engines run eight operations on disjoint mat ranges at once.
//
// Operations (micro-programs) built:
//   ADD  n-bit bit-serial addition, 8n+2 operations: AAP C0->DCC1, then per
//        bit i: AAP B_i->{T0,T1,T2}; AAP A_i->DCC0; AAP DCC1->T3;
//        AP MAJ(T1,DCC0,DCC1) (carry out); AP MAJ(T2,T3,!DCC0);
//        AAP !DCC1->T0; AAP A_i->T1; MAJ(T0,T1,T2) copied to Y_i;
//        finally AAP DCC1->Y_n. (Sum = MAJ(A, !Cout, MAJ(B, Cin, !Cout)).)
//   SUB  n-bit A - B as A + !B + 1, 9n+2 operations: the carry starts from
//        C1, and each bit first runs AAP B_i->DCC0; AAP !DCC0->{T0,T1,T2},
//        then the ADD steps from A_i->DCC0 on. Y_n is the carry out, i.e.
//        1 when A >= B (no borrow).
//   COPY n row copies (AAP src+i -> dst+i).
//   MOV  bbop_mov: for every bit row i and column group j one GB-MOV (source
//        and destination mats differ, destination = source + 1) or LC-MOV
//        (same mat).
// Command forms and gaps to the next command of the same engine:
//   AAP   ACT_ENQ r1 (tRAS), ACT_DEQ r2 (tRAS), PRE (tRP)
//   AP    ACT_DEQ r1 (tRAS), PRE (tRP)
//   GBMOV ACT_ENQ src in [s,s] enqueueing [d,d] (2), ACT_DEQ dst (tRAS),
//         RD src col in s (tRELOC), WR dst col in d with gbmov (tWR), PRE [s,d] (tRP)
//   LCMOV ACT_DEQ src (tRAS), RD with HFF hold (1), PRE_ENQ (tRP),
//         ACT_DEQ dst (tRAS), WR (tRELOC+tWR), PRE (tRP)
// The closing PRE of an operation is a PRE_ENQ carrying the next operation's
// range when that range is the same (PRE-ACT overlap); otherwise the next
// operation starts with its own PRE_ENQ (1 cycle). So a GB-MOV takes
// 2 + tRAS + tRELOC + tWR + tRP cycles from its first ACT and an LC-MOV
// 2(tRAS + tRP) + tRELOC + tWR + 1, against the paper's tRAS + tRELOC + tWR +
// tRP and 2(tRAS + tRP) + tRELOC + tWR.
// The adder's step list and counts follow the paper's Fig. 2 and text; SUB
// (one of the operations the evaluated applications use) is this design's
// own derivation from it; which
// B rows the three majorities use, the timing values (DDR4-2400 at 1.2 GHz;
// tRELOC assumed 4 cycles) and the command forms are this design's own.
module uprog_engine
  import mimdram_pkg::*;
#(
  parameter int unsigned ROWS    = 1024,
  parameter int unsigned T_RAS   = 39,
  parameter int unsigned T_RP    = 16,
  parameter int unsigned T_WR    = 18,
  parameter int unsigned T_RELOC = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  bbop_t      bbop,
  output logic       busy,
  output logic       req,
  output dram_cmd_t  cmd,
  input  logic       gnt,
  output logic       done,
  output bbop_t      cur_bbop
);
  typedef enum logic [1:0] {K_AAP, K_AP, K_GBMOV, K_LCMOV} kind_e;
  typedef struct packed {
    kind_e            kind;
    logic [ROW_W-1:0] r1, r2;
    logic [COL_W-1:0] c1, c2;
    mat_range_t       first, enq2, close;
  } uop_t;
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;

  localparam int unsigned BB = ROWS - 16;           // address of B0
  localparam logic [ROW_W-1:0] A_C0 = ROW_W'(ROWS - 18);
  localparam logic [ROW_W-1:0] A_C1 = ROW_W'(ROWS - 17);
  function automatic logic [ROW_W-1:0] baddr(int unsigned k);
    return ROW_W'(BB + k);
  endfunction

  state_e          state;
  bbop_t           bb;
  logic [6:0]      ca;     // bit / row index (ADD: 0 init, 1..n bits, n+1 final)
  logic [7:0]      cb;     // ADD step or MOV column group
  logic [2:0]      k;      // command within the operation
  logic            need_enq;
  logic [7:0]      wait_cnt;
  uop_t            u, un;
  logic            last_op, last_sub;
  logic [6:0]      na;
  logic [7:0]      nb;
  logic [7:0]      delay;
  logic            merge;

  function automatic uop_t uop_of(bbop_t x, logic [6:0] a, logic [7:0] b);
    uop_t o;
    logic [ROW_W-1:0] i;
    logic [3:0]       step;
    step = '0;
    o.kind = K_AAP; o.r1 = '0; o.r2 = '0; o.c1 = '0; o.c2 = '0;
    o.first = x.range; o.enq2 = x.range; o.close = x.range;
    i = ROW_W'(a) - 1'b1;
    unique case (x.op)
      OP_ADD, OP_SUB: begin
        if (a == 0) begin
          o.r1 = (x.op == OP_SUB) ? A_C1 : A_C0; o.r2 = baddr(6);
        end else if (a == 7'(x.nbits) + 7'd1) begin
          o.r1 = baddr(6); o.r2 = x.dst_row + ROW_W'(x.nbits);
        end else begin
          // SUB runs two extra steps first (B -> DCC0, !DCC0 -> T0..T2),
          // then the adder's steps 1..7 on the inverted B
          if (x.op == OP_SUB && b == 8'd0)      step = 4'd8;
          else if (x.op == OP_SUB && b == 8'd1) step = 4'd9;
          else if (x.op == OP_SUB)              step = 4'(b - 8'd1);
          else                                  step = 4'(b);
          unique case (step)
            4'd0: begin o.r1 = x.src2_row + i; o.r2 = baddr(8); end
            4'd1: begin o.r1 = x.src1_row + i; o.r2 = baddr(4); end
            4'd2: begin o.r1 = baddr(6);       o.r2 = baddr(3); end
            4'd3: begin o.kind = K_AP; o.r1 = baddr(9);  end
            4'd4: begin o.kind = K_AP; o.r1 = baddr(10); end
            4'd5: begin o.r1 = baddr(7);       o.r2 = baddr(0); end
            4'd6: begin o.r1 = x.src1_row + i; o.r2 = baddr(1); end
            4'd7: begin o.r1 = baddr(8);       o.r2 = x.dst_row + i; end
            4'd8: begin o.r1 = x.src2_row + i; o.r2 = baddr(4); end
            default: begin o.r1 = baddr(5);    o.r2 = baddr(8); end
          endcase
        end
      end
      OP_COPY: begin
        o.r1 = x.src1_row + ROW_W'(a); o.r2 = x.dst_row + ROW_W'(a);
      end
      OP_MOV: begin
        o.r1 = x.src1_row + ROW_W'(a); o.r2 = x.dst_row + ROW_W'(a);
        o.c1 = x.src_col + COL_W'(b);  o.c2 = x.dst_col + COL_W'(b);
        if (x.range.mat_begin == x.range.mat_end) begin
          o.kind = K_LCMOV;
        end else begin
          o.kind  = K_GBMOV;
          o.first = '{mat_begin: x.range.mat_begin, mat_end: x.range.mat_begin};
          o.enq2  = '{mat_begin: x.range.mat_end,   mat_end: x.range.mat_end};
        end
      end
      default: ;
    endcase
    return o;
  endfunction

  function automatic dram_cmd_t mk(dram_op_e op, logic [ROW_W-1:0] r, logic [COL_W-1:0] c,
                                   mat_range_t rg, logic gm, logic hold);
    dram_cmd_t d;
    d.op = op; d.row = r; d.col = c; d.range = rg; d.gbmov = gm; d.hff_hold = hold;
    return d;
  endfunction

  // Position of the next operation.
  always_comb begin
    na = ca; nb = cb; last_op = 1'b0;
    unique case (bb.op)
      OP_ADD, OP_SUB: begin
        if (ca == 7'(bb.nbits) + 7'd1) last_op = 1'b1;
        else if (ca == 0 || cb == ((bb.op == OP_SUB) ? 8'd8 : 8'd7)) begin na = ca + 1'b1; nb = '0; end
        else nb = cb + 1'b1;
      end
      OP_MOV: begin
        if (ca == 7'(bb.nbits) - 7'd1 && cb == bb.ncols - 8'd1) last_op = 1'b1;
        else if (cb == bb.ncols - 8'd1) begin na = ca + 1'b1; nb = '0; end
        else nb = cb + 1'b1;
      end
      default: begin
        if (ca == 7'(bb.nbits) - 7'd1) last_op = 1'b1;
        else na = ca + 1'b1;
      end
    endcase
    u  = uop_of(bb, ca, cb);
    un = uop_of(bb, na, nb);
    merge = !last_op && (un.first == u.close);
  end

  // Current command.
  always_comb begin
    dram_cmd_t pre_star;
    pre_star = mk(merge ? DC_PRE_ENQ : DC_PRE, '0, '0, u.close, 1'b0, 1'b0);
    cmd = DRAM_NOP; delay = 8'd1; last_sub = 1'b0;
    if (need_enq) begin
      cmd = mk(DC_PRE_ENQ, '0, '0, u.first, 1'b0, 1'b0);
    end else begin
      unique case (u.kind)
        K_AAP: unique case (k)
          3'd0: begin cmd = mk(DC_ACT_ENQ, u.r1, '0, u.enq2, 1'b0, 1'b0); delay = 8'(T_RAS); end
          3'd1: begin cmd = mk(DC_ACT_DEQ, u.r2, '0, u.first, 1'b0, 1'b0); delay = 8'(T_RAS); end
          default: begin cmd = pre_star; delay = 8'(T_RP); last_sub = 1'b1; end
        endcase
        K_AP: unique case (k)
          3'd0: begin cmd = mk(DC_ACT_DEQ, u.r1, '0, u.first, 1'b0, 1'b0); delay = 8'(T_RAS); end
          default: begin cmd = pre_star; delay = 8'(T_RP); last_sub = 1'b1; end
        endcase
        K_GBMOV: unique case (k)
          3'd0: begin cmd = mk(DC_ACT_ENQ, u.r1, '0, u.enq2, 1'b0, 1'b0); delay = 8'd2; end
          3'd1: begin cmd = mk(DC_ACT_DEQ, u.r2, '0, u.enq2, 1'b0, 1'b0); delay = 8'(T_RAS); end
          3'd2: begin cmd = mk(DC_RD, '0, u.c1, u.first, 1'b0, 1'b0); delay = 8'(T_RELOC); end
          3'd3: begin cmd = mk(DC_WR, '0, u.c2, u.enq2, 1'b1, 1'b0); delay = 8'(T_WR); end
          default: begin cmd = pre_star; delay = 8'(T_RP); last_sub = 1'b1; end
        endcase
        default: unique case (k)  // K_LCMOV
          3'd0: begin cmd = mk(DC_ACT_DEQ, u.r1, '0, u.first, 1'b0, 1'b0); delay = 8'(T_RAS); end
          3'd1: begin cmd = mk(DC_RD, '0, u.c1, u.first, 1'b0, 1'b1); delay = 8'd1; end
          3'd2: begin cmd = mk(DC_PRE_ENQ, '0, '0, u.first, 1'b0, 1'b0); delay = 8'(T_RP); end
          3'd3: begin cmd = mk(DC_ACT_DEQ, u.r2, '0, u.first, 1'b0, 1'b0); delay = 8'(T_RAS); end
          3'd4: begin cmd = mk(DC_WR, '0, u.c2, u.first, 1'b0, 1'b0); delay = 8'(T_RELOC + T_WR); end
          default: begin cmd = pre_star; delay = 8'(T_RP); last_sub = 1'b1; end
        endcase
      endcase
    end
  end

  assign busy     = (state != S_IDLE);
  assign req      = (state == S_RUN) && (wait_cnt == 0);
  assign cur_bbop = bb;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE; bb <= '0; ca <= '0; cb <= '0; k <= '0;
      need_enq <= 1'b1; wait_cnt <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (wait_cnt != 0) wait_cnt <= wait_cnt - 1'b1;
      unique case (state)
        S_IDLE: if (start) begin
          bb <= bbop; ca <= '0; cb <= '0; k <= '0; need_enq <= 1'b1; wait_cnt <= '0;
          state <= S_RUN;
        end
        S_RUN: if (gnt) begin
          wait_cnt <= delay - 1'b1;
          if (need_enq) need_enq <= 1'b0;
          else if (last_sub) begin
            k <= '0;
            if (last_op) state <= S_DRAIN;
            else begin ca <= na; cb <= nb; need_enq <= !merge; end
          end else k <= k + 1'b1;
        end
        default: if (wait_cnt == 0) begin  // S_DRAIN
          done  <= 1'b1;
          state <= S_IDLE;
        end
      endcase
    end
  end

  a_gnt_needs_req: assert property (@(posedge clk) disable iff (!rst_n) gnt |-> req);
  a_start_idle:    assert property (@(posedge clk) disable iff (!rst_n) start |-> state == S_IDLE);
  a_nbits:         assert property (@(posedge clk) disable iff (!rst_n) start |-> bbop.nbits != 0);
endmodule
