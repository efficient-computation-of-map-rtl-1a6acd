// tb_fcmi_preprocess: feeds random occupancy codes and cell widths, with
// random bubbles, and checks that each valid cell leaves exactly 8 cycles
// later with every field equal to the reference model and its reset flag.
module tb_fcmi_preprocess;
  import fcmi_pkg::*;
  import fcmi_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_reset = 0, in_full = 0, out_valid, out_reset;
  lut_entry_t in_lut = '0; fx_t in_w = 0; pre_t out_pre;
  fcmi_preprocess dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_reset(in_reset),
    .in_lut(in_lut), .in_full(in_full), .in_w(in_w), .out_valid(out_valid),
    .out_reset(out_reset), .out_pre(out_pre));
  int checks = 0, failures = 0;
  typedef struct { bit v; bit r; pre_t p; } exp_t;
  exp_t hist [$];
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ref_load("rtl/occ_lut.hex");
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 3000; t++) begin
      exp_t e;
      int o;
      @(negedge clk);
      // check the cell that entered 8 cycles ago
      if (hist.size() == PRE_STAGES) begin
        e = hist.pop_front();
        checks++;
        if (out_valid !== e.v || (e.v && (out_reset !== e.r || out_pre !== e.p))) begin
          failures++;
          if (failures < 10) $display("t=%0d mismatch v=%0d/%0d", t, out_valid, e.v);
        end
      end
      o = $urandom_range(0, 100);
      in_valid = ($urandom_range(0, 9) != 0);
      in_reset = in_valid && ($urandom_range(0, 3) == 0);
      in_lut   = ref_lut[o];
      in_full  = (o == 100);
      in_w     = fx_t'($urandom_range(4096, 5793));
      e.v = in_valid; e.r = in_reset; e.p = ref_pre(o, in_w);
      hist.push_back(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
