// occ_bank: one occupancy-grid memory bank.
//
// A simple dual-port RAM, one synchronous read port for the cores and one
// write port through which the host loads the occupancy grid. With 16 banks
// of 16384 words a 512 x 512 map fits, the largest the source design stores.
// The 8-bit word (occupancy code 0..100) is this design's choice.
//
// Timing: read data appears one cycle after re/raddr.
module occ_bank
  import fcmi_pkg::*;
#(
  parameter int DEPTH = MAX_DIM * PITCH
) (
  input  logic  clk,
  input  logic  re,
  input  addr_t raddr,
  output occ_t  rdata,
  input  logic  we,
  input  addr_t waddr,
  input  occ_t  wdata
);
  occ_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
