// tb_xbar_resp: random data and random select vectors; every output port
// must carry the input port named by its select.
module tb_xbar_resp;
  import fcmi_pkg::*;
  logic [31:0] din [N_CORES], dout [N_CORES]; bank_t sel [N_CORES];
  xbar_resp #(.DW(32)) dut (.din(din), .sel(sel), .dout(dout));
  int checks = 0, failures = 0;
  initial begin
    for (int t = 0; t < 500; t++) begin
      foreach (din[i]) begin din[i] = $urandom; sel[i] = bank_t'($urandom); end
      #1;
      foreach (dout[i]) begin
        checks++;
        if (dout[i] !== din[sel[i]]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
