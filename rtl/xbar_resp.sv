// xbar_resp: data crossbar between the memory banks and the cores.
//
// An N x N selector: output port i carries input port sel[i]. The memory
// subsystem uses one instance to deliver occupancy words from banks to
// cores, one to deliver partial MI from banks to cores, and one to steer the
// updated MI from cores back to the banks (sel = the core that owns the
// bank's request). The source design names this second crossbar; its insides
// are this design's.
//
// Timing: combinational.
module xbar_resp
  import fcmi_pkg::*;
#(
  parameter int N  = N_CORES,
  parameter int DW = FX_W
) (
  input  logic [DW-1:0] din  [N],
  input  bank_t         sel  [N],
  output logic [DW-1:0] dout [N]
);
  always_comb
    for (int i = 0; i < N; i++) dout[i] = din[sel[i]];
endmodule
