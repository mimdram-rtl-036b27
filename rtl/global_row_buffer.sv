// global_row_buffer: the bank's global sense amplifiers for one subarray,
// with MIMDRAM's inter-mat interconnect.
//
// There is one 4-bit sense-amplifier set SA(i) per mat, fed by the mat's
// HFFs over the global bitlines. On rd[i] the set loads the mat's column
// data. On wr[i] the set is written and drives the mat's HFFs and sense
// amplifiers; a 2:1 multiplexer in front of each set chooses the source:
// the I/O bus (normal WR) or the neighbour set SA(i-1) (WR of a GB-MOV,
// gbmov = 1). This moves four bits from mat i-1 to mat i. SA(0) has no
// neighbour in the chip and takes the I/O bus in both cases (the paper does
// not cover moves across chips). io_rdata shows all sets; wr_data is the
// multiplexer output. The multiplexer and the shift toward higher mat index
// follow the paper (Fig. 4); the rest is an ordinary register per set,
// cleared by reset.
module global_row_buffer
  import mimdram_pkg::*;
#(
  parameter int unsigned MATS = 16
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic [MATS-1:0]               rd,
  input  logic [MATS-1:0]               wr,
  input  logic                          gbmov,
  input  logic [MATS-1:0][HFF_BITS-1:0] mat_data,
  input  logic [MATS*HFF_BITS-1:0]      io_wdata,
  output logic [MATS-1:0][HFF_BITS-1:0] wr_data,
  output logic [MATS*HFF_BITS-1:0]      io_rdata
);
  logic [MATS-1:0][HFF_BITS-1:0] sa;

  always_comb
    for (int i = 0; i < MATS; i++)
      wr_data[i] = (gbmov && i > 0) ? sa[(i > 0) ? i-1 : 0] : io_wdata[i*HFF_BITS +: HFF_BITS];

  always_ff @(posedge clk) begin
    if (!rst_n) sa <= '0;
    else
      for (int i = 0; i < MATS; i++)
        if (rd[i])      sa[i] <= mat_data[i];
        else if (wr[i]) sa[i] <= wr_data[i];
  end

  assign io_rdata = sa;
endmodule
