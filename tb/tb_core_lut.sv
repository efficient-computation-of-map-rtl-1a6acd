// tb_core_lut: checks every entry of the occupancy LUT against values
// computed here with real arithmetic (lambda = -ln(1-o), -ln(lambda),
// 1/lambda, within one LSB of Q20.12), the degenerate codes 0 and 100, the
// clamp of codes above 100 and the one-cycle read latency.
module tb_core_lut;
  import fcmi_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic en = 0; occ_t occ = 0; lut_entry_t entry; logic full;
  core_lut dut (.clk(clk), .en(en), .occ(occ), .entry(entry), .full(full));
  int checks = 0, failures = 0;
  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic bit near(fx_t got, real want);
    real d;
    d = real'(got) - want * 4096.0;
    return (d <= 1.0 && d >= -1.0);
  endfunction
  initial begin
    for (int i = 0; i <= 110; i++) begin
      int k;
      @(negedge clk); en = 1; occ = occ_t'(i);
      @(posedge clk); #1;
      k = (i > 100) ? 100 : i;
      checks++;
      if (k == 0) begin
        if (entry !== '0 || full) begin failures++; $display("code 0 wrong"); end
      end else if (k == 100) begin
        if (entry.lam != 32768 || entry.nlog != -66020 || entry.inv != 0 || !full) begin
          failures++; $display("code %0d wrong: %0d %0d %0d %0d", i, entry.lam, entry.nlog, entry.inv, full);
        end
      end else begin
        real o, lam;
        o = k / 100.0; lam = -$ln(1.0 - o);
        if (!near(entry.lam, lam) || !near(entry.nlog, -$ln(lam)) || !near(entry.inv, 1.0 / lam) || full) begin
          failures++;
          $display("code %0d: got %0d %0d %0d, want %f %f %f", k, entry.lam, entry.nlog, entry.inv,
                   lam * 4096, -$ln(lam) * 4096, 4096 / lam);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
