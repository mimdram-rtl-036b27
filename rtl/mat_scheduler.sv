// mat_scheduler: online first-fit scheduling of bbops onto mats and
// micro-program engines.
//
// Each cycle the scheduler looks at one bbop buffer entry, walking from the
// oldest toward the newest. It reads the entry's mat range, asks the mat
// scoreboard whether all those mats are free, and if they are and an engine
// is idle it dispatches in the same cycle: marks the range busy, copies the
// bbop to the lowest-numbered idle engine (one-hot `dispatch`) and removes
// the entry. Otherwise it moves on to the next entry. When it reaches the
// newest entry, or when an engine finishes and frees mats (`restart`), it
// goes back to the oldest. Steps (i)-(iv) of the first-fit loop follow the
// paper; examining one entry per cycle is this design's choice.
module mat_scheduler
  import mimdram_pkg::*;
#(
  parameter int unsigned DEPTH = 1024,
  parameter int unsigned N_PE  = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic [$clog2(DEPTH)-1:0] buf_head,
  input  logic [$clog2(DEPTH)-1:0] buf_tail,
  input  bbop_t                    rd_bbop,
  input  logic                     rd_valid,
  output logic [$clog2(DEPTH)-1:0] rd_idx,
  output logic                     remove,
  output mat_range_t               q_range,
  input  logic                     q_free,
  output logic                     set_en,
  input  logic [N_PE-1:0]          pe_busy,
  input  logic                     restart,
  output logic [N_PE-1:0]          dispatch,
  output bbop_t                    dispatch_bbop
);
  localparam int unsigned AW = $clog2(DEPTH);

  logic [AW-1:0]   scan;
  logic [N_PE-1:0] free_onehot;
  logic            fire;
  logic [AW-1:0]   nxt;

  always_comb begin
    free_onehot = '0;
    for (int i = N_PE - 1; i >= 0; i--)
      if (!pe_busy[i]) free_onehot = N_PE'(1) << i;
  end

  assign rd_idx        = scan;
  assign q_range       = rd_bbop.range;
  assign fire          = rd_valid && q_free && (free_onehot != '0);
  assign remove        = fire;
  assign set_en        = fire;
  assign dispatch      = fire ? free_onehot : '0;
  assign dispatch_bbop = rd_bbop;
  assign nxt           = scan + 1'b1;

  always_ff @(posedge clk) begin
    if (!rst_n) scan <= '0;
    else if (restart || scan == buf_tail || nxt == buf_tail) scan <= buf_head;
    else scan <= nxt;
  end
endmodule
