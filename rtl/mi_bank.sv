// mi_bank: one mutual-information memory bank.
//
// Dual-port RAM with one synchronous read port, which delivers partial MI to
// the cores, and one write port, which takes the updated MI back; the source
// design uses one port of each dual-port block RAM for each. Because cells of
// different rays may hit the same word on consecutive cycles, a read of the
// word being written in the same cycle returns the new data (write-first
// bypass). That bypass, and the bypass flag, are this design's additions to
// keep the read-modify-write of the MI map exact.
//
// Timing: read data and bypass appear one cycle after re/raddr.
module mi_bank
  import fcmi_pkg::*;
#(
  parameter int DEPTH = MAX_DIM * PITCH
) (
  input  logic  clk,
  input  logic  re,
  input  addr_t raddr,
  output fx_t   rdata,
  output logic  bypass,
  input  logic  we,
  input  addr_t waddr,
  input  fx_t   wdata
);
  fx_t mem [DEPTH];
  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) begin
      if (we && waddr == raddr) begin
        rdata  <= wdata;
        bypass <= 1'b1;
      end else begin
        rdata  <= mem[raddr];
        bypass <= 1'b0;
      end
    end else begin
      bypass <= 1'b0;
    end
  end
endmodule
