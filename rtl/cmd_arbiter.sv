// cmd_arbiter: puts one DRAM command per cycle on the shared command bus.
//
// Requesters are the N_PE micro-program engines (round-robin) and a host
// port for regular memory requests (fixed priority over the engines).
// The DRAM chips give every ACT the oldest range in their mat queues, so the
// arbiter must let ACTs out in the order in which their ranges were
// enqueued, even when engines interleave. It keeps an order FIFO of
// requester ids, pushed by every PRE_ENQ/ACT_ENQ and popped by every
// ACT_ENQ/ACT_DEQ; an ACT is granted only to the requester at its head, and
// a PRE_ENQ only while the FIFO has room. Each engine has at most one range
// outstanding, and every range in the FIFO belongs to a requester that will
// send its ACT, so a full FIFO only delays PRE_ENQs; nothing deadlocks. An ACT_ENQ uses
// the bus for two cycles on DDR4 pins (row, then mat range), so nothing is
// granted in the cycle after it.
// Timing: grants are combinational; the granted command appears on `bus` at
// the next clock edge (registered), NOP otherwise.
// Issuing one engine per cycle follows the paper; the order FIFO and the
// host priority are this design's own.
module cmd_arbiter
  import mimdram_pkg::*;
#(
  parameter int unsigned N_PE   = 8,
  parameter int unsigned QDEPTH = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic [N_PE-1:0]  req,
  input  dram_cmd_t        pe_cmd [N_PE],
  output logic [N_PE-1:0]  gnt,
  input  logic             host_req,
  input  dram_cmd_t        host_cmd,
  output logic             host_gnt,
  output dram_cmd_t        bus
);
  localparam int unsigned IDW = $clog2(N_PE + 1);
  localparam int unsigned PW  = (QDEPTH > 1) ? $clog2(QDEPTH) : 1;
  localparam logic [IDW-1:0] HOST_ID = IDW'(N_PE);

  logic [IDW-1:0] ofifo [QDEPTH];
  logic [PW-1:0]  rd_ptr, wr_ptr;
  logic [PW:0]    count;
  logic           blocked;              // second cycle of an ACT_ENQ
  logic [IDW-1:0] rr;                   // round-robin pointer
  logic [N_PE-1:0] ok;
  logic           host_ok;
  logic           any_gnt;
  dram_cmd_t      gcmd;
  logic [IDW-1:0] gid;

  function automatic logic is_deq(dram_op_e op);
    return (op == DC_ACT_ENQ) || (op == DC_ACT_DEQ);
  endfunction
  function automatic logic is_enq(dram_op_e op);
    return (op == DC_ACT_ENQ) || (op == DC_PRE_ENQ);
  endfunction
  function automatic logic eligible(dram_cmd_t c, logic [IDW-1:0] id, logic [PW:0] cnt,
                                    logic [IDW-1:0] head);
    if (is_deq(c.op)) return (cnt != 0) && (head == id);
    if (is_enq(c.op)) return cnt < (PW+1)'(QDEPTH);
    return 1'b1;
  endfunction

  always_comb begin
    logic [IDW:0] idx;
    idx = '0;
    host_ok = host_req && !blocked && eligible(host_cmd, HOST_ID, count, ofifo[rd_ptr]);
    for (int i = 0; i < N_PE; i++)
      ok[i] = req[i] && !blocked && eligible(pe_cmd[i], IDW'(i), count, ofifo[rd_ptr]);
    gnt = '0; host_gnt = 1'b0; gcmd = DRAM_NOP; gid = '0;
    if (host_ok) begin
      host_gnt = 1'b1; gcmd = host_cmd; gid = HOST_ID;
    end else begin
      for (int j = 0; j < N_PE; j++) begin
        idx = (IDW+1)'(rr) + (IDW+1)'(j);
        if (idx >= (IDW+1)'(N_PE)) idx = idx - (IDW+1)'(N_PE);
        if (ok[idx[IDW-1:0]] && gnt == '0) begin
          gnt[idx[IDW-1:0]] = 1'b1; gcmd = pe_cmd[idx[IDW-1:0]]; gid = idx[IDW-1:0];
        end
      end
    end
    any_gnt = host_gnt || (gnt != '0);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      rd_ptr <= '0; wr_ptr <= '0; count <= '0; blocked <= 1'b0; rr <= '0; bus <= DRAM_NOP;
      for (int i = 0; i < QDEPTH; i++) ofifo[i] <= '0;
    end else begin
      bus     <= any_gnt ? gcmd : DRAM_NOP;
      blocked <= any_gnt && (gcmd.op == DC_ACT_ENQ);
      if (gnt != '0) rr <= (gid == IDW'(N_PE - 1)) ? '0 : gid + 1'b1;
      if (any_gnt && is_enq(gcmd.op)) begin
        ofifo[wr_ptr] <= gid;
        wr_ptr <= (wr_ptr == PW'(QDEPTH-1)) ? '0 : wr_ptr + 1'b1;
      end
      if (any_gnt && is_deq(gcmd.op))
        rd_ptr <= (rd_ptr == PW'(QDEPTH-1)) ? '0 : rd_ptr + 1'b1;
      count <= count + (PW+1)'(any_gnt && is_enq(gcmd.op)) - (PW+1)'(any_gnt && is_deq(gcmd.op));
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0({gnt, host_gnt}));
endmodule
