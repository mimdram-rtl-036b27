// mat_translation_table: maps (process ID, mat label) to the mat range the
// allocator gave that label.
//
// The compiler tags each bbop with a mat label; the OS allocator places the
// label's objects in a physically contiguous mat range and records it here.
// When the CPU dispatches a bbop it looks the label up and replaces it with
// the range. The table is direct mapped: index = (label XOR pid) folded to
// log2(ENTRIES) bits, and each entry keeps a valid bit, the full
// {pid, label} as tag, and the 14-bit range. Lookups are combinational;
// writes (from the OS) take effect at the clock edge. Reset invalidates all
// entries. The paper gives the table's purpose, its hashed index and its
// 2 KB size; ENTRIES = 512 is 2 KB at 32 bits an entry, though the entry
// here, with a full tag, is 39 bits wide.
module mat_translation_table
  import mimdram_pkg::*;
#(
  parameter int unsigned ENTRIES = 512,
  parameter int unsigned PID_W   = 16,
  parameter int unsigned LABEL_W = 8
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               wr_en,
  input  logic [PID_W-1:0]   wr_pid,
  input  logic [LABEL_W-1:0] wr_label,
  input  mat_range_t         wr_range,
  input  logic [PID_W-1:0]   lk_pid,
  input  logic [LABEL_W-1:0] lk_label,
  output logic               lk_hit,
  output mat_range_t         lk_range
);
  localparam int unsigned IW = $clog2(ENTRIES);
  typedef struct packed {
    logic [PID_W-1:0]   pid;
    logic [LABEL_W-1:0] label;
    mat_range_t         range;
  } entry_t;

  entry_t             tbl [ENTRIES];
  logic [ENTRIES-1:0] valid;
  logic [IW-1:0]      wi, li;

  function automatic logic [IW-1:0] hash(logic [PID_W-1:0] p, logic [LABEL_W-1:0] l);
    logic [IW-1:0] h;
    h = '0;
    for (int i = 0; i < PID_W; i++)   h[i % IW] ^= p[i];
    for (int i = 0; i < LABEL_W; i++) h[i % IW] ^= l[i];
    return h;
  endfunction

  assign wi       = hash(wr_pid, wr_label);
  assign li       = hash(lk_pid, lk_label);
  assign lk_hit   = valid[li] && tbl[li].pid == lk_pid && tbl[li].label == lk_label;
  assign lk_range = tbl[li].range;

  always_ff @(posedge clk)
    if (wr_en) tbl[wi] <= '{pid: wr_pid, label: wr_label, range: wr_range};

  always_ff @(posedge clk) begin
    if (!rst_n) valid <= '0;
    else if (wr_en) valid[wi] <= 1'b1;
  end
endmodule
