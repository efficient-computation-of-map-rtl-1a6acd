// tb_occ_bank: writes random words to random addresses, keeping a model
// memory, then reads addresses back (including unwritten-then-written and
// rewritten ones) and checks the data one cycle after the read request, and
// that the output holds while re is low.
module tb_occ_bank;
  import fcmi_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic re = 0, we = 0; addr_t raddr = 0, waddr = 0; occ_t wdata = 0, rdata;
  occ_bank #(.DEPTH(1024)) dut (.clk(clk), .re(re), .raddr(raddr), .rdata(rdata),
    .we(we), .waddr(waddr), .wdata(wdata));
  int checks = 0, failures = 0;
  occ_t model [1024];
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 1024; i++) begin
      @(negedge clk); we = 1; waddr = addr_t'(i); wdata = occ_t'($urandom); model[i] = wdata;
    end
    for (int i = 0; i < 3000; i++) begin
      int a;
      @(negedge clk);
      a = $urandom_range(0, 1023);
      we = ($urandom_range(0, 1) == 1); waddr = addr_t'($urandom_range(0, 1023)); wdata = occ_t'($urandom);
      re = 1; raddr = addr_t'(a);
      @(posedge clk); #1;
      checks++;
      if (rdata !== model[a] && !(we && waddr == addr_t'(a))) begin
        failures++; if (failures < 10) $display("addr %0d got %0d want %0d", a, rdata, model[a]);
      end
      if (we) model[waddr] = wdata;
    end
    @(negedge clk); we = 0; re = 1; raddr = 5;
    @(negedge clk); re = 0; raddr = 6;
    @(negedge clk);
    checks++; if (rdata !== model[5]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
