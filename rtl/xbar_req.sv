// xbar_req: request crossbar from the 16 address translation units to the
// 16 memory banks.
//
// Each ATU presents (valid, bank, address); every bank picks the one request
// addressed to it and records which ATU it came from. The diagonal banking
// guarantees that the 16 concurrent requests address 16 distinct banks, so no
// arbitration is needed; an assertion checks that rule. The source design
// names this crossbar; its insides are this design's.
//
// Timing: combinational.
module xbar_req
  import fcmi_pkg::*;
#(
  parameter int N = N_CORES
) (
  input  mem_req_t req  [N],
  output logic     en   [N],
  output addr_t    addr [N],
  output bank_t    src  [N]
);
  always_comb begin
    for (int b = 0; b < N; b++) begin
      en[b]   = 1'b0;
      addr[b] = '0;
      src[b]  = '0;
      for (int c = 0; c < N; c++) begin
        if (req[c].valid && int'(req[c].bank) == b) begin
          en[b]   = 1'b1;
          addr[b] = req[c].addr;
          src[b]  = bank_t'(c);
        end
      end
    end
  end

  // at most one request per bank per cycle
  always_comb begin
    for (int b = 0; b < N; b++) begin
      int hits;
      hits = 0;
      for (int c = 0; c < N; c++)
        if (req[c].valid && int'(req[c].bank) == b) hits++;
      assert (hits <= 1) else $error("bank %0d requested by %0d ATUs", b, hits);
    end
  end
endmodule
