// tb_fcmi_feedback: runs 8 interleaved rays through the feedback loop, one
// cell per cycle in turn, with ray resets at the start of each ray and at
// random points, and random bubbles. A per-ray reference state is updated
// with the reference recursion; each valid output, 8 cycles after its input,
// must equal it.
module tb_fcmi_feedback;
  import fcmi_pkg::*;
  import fcmi_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_reset = 0, out_valid;
  pre_t in_pre = '0; fb_state_t out_state;
  fcmi_feedback dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_reset(in_reset),
    .in_pre(in_pre), .out_valid(out_valid), .out_state(out_state));
  int checks = 0, failures = 0;
  fb_state_t st [N_SLOTS];
  typedef struct { bit v; fb_state_t s; } exp_t;
  exp_t hist [$];
  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    ref_load("rtl/occ_lut.hex");
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 4000; t++) begin
      exp_t e;
      int s;
      @(negedge clk);
      if (hist.size() == FB_STAGES) begin
        e = hist.pop_front();
        if (e.v) begin
          checks++;
          if (out_valid !== 1'b1 || out_state !== e.s) begin
            failures++;
            if (failures < 10) $display("t=%0d mismatch", t);
          end
        end else if (out_valid !== 1'b0) begin
          checks++; failures++;
        end
      end
      s = t % N_SLOTS;
      in_valid = (t < N_SLOTS) || ($urandom_range(0, 7) != 0);
      in_reset = in_valid && ((t < N_SLOTS) || $urandom_range(0, 40) == 0);
      in_pre   = ref_pre($urandom_range(0, 100), fx_t'($urandom_range(4096, 5793)));
      if (in_valid) st[s] = ref_fb(in_reset ? '0 : st[s], in_pre);
      e.v = in_valid; e.s = st[s];
      hist.push_back(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
