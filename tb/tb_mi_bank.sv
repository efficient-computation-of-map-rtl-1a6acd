// tb_mi_bank: random writes and reads against a model memory; a read of
// the word written in the same cycle must return the new data and raise
// bypass, any other read the stored data with bypass low.
module tb_mi_bank;
  import fcmi_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re = 0, we = 0, bypass; addr_t raddr = 0, waddr = 0; fx_t wdata = 0, rdata;
  mi_bank #(.DEPTH(256)) dut (.clk(clk), .re(re), .raddr(raddr), .rdata(rdata), .bypass(bypass),
    .we(we), .waddr(waddr), .wdata(wdata));
  int checks = 0, failures = 0, n_byp = 0;
  fx_t model [256];
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 256; i++) begin
      @(negedge clk); we = 1; waddr = addr_t'(i); wdata = fx_t'($urandom); model[i] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      int a; fx_t want; bit same;
      @(negedge clk);
      a = $urandom_range(0, 255);
      we = ($urandom_range(0, 2) != 0);
      waddr = ($urandom_range(0, 2) == 0) ? addr_t'(a) : addr_t'($urandom_range(0, 255));
      wdata = fx_t'($urandom);
      re = 1; raddr = addr_t'(a);
      same = we && (waddr == addr_t'(a));
      want = same ? wdata : model[a];
      if (we) model[waddr] = wdata;
      @(posedge clk); #1;
      checks++;
      if (rdata !== want || bypass !== same) begin
        failures++; if (failures < 10) $display("addr %0d got %0d/%0d want %0d/%0d", a, rdata, bypass, want, same);
      end
      if (same) n_byp++;
    end
    checks++; if (n_byp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
