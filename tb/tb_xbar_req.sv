// tb_xbar_req: presents random permutations of banks (with random invalid
// requests) and checks that every bank receives exactly the request
// addressed to it, with the right address and source index, and that banks
// without a request stay disabled.
module tb_xbar_req;
  import fcmi_pkg::*;
  mem_req_t req [N_CORES];
  logic en [N_CORES]; addr_t addr [N_CORES]; bank_t src [N_CORES];
  xbar_req dut (.req(req), .en(en), .addr(addr), .src(src));
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 500; t++) begin
      int perm [N_CORES];
      foreach (perm[i]) perm[i] = i;
      perm.shuffle();
      foreach (req[c]) begin
        req[c].valid = ($urandom_range(0, 4) != 0);
        req[c].bank  = bank_t'(perm[c]);
        req[c].addr  = addr_t'($urandom);
      end
      #1;
      for (int c = 0; c < N_CORES; c++) begin
        int b;
        b = perm[c];
        checks++;
        if (en[b] !== req[c].valid || (req[c].valid && (addr[b] !== req[c].addr || src[b] !== bank_t'(c)))) begin
          failures++; if (failures < 10) $display("t=%0d core %0d bank %0d wrong", t, c, b);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
