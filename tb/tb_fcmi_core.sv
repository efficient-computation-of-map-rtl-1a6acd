// tb_fcmi_core: drives one core with 8 interleaved rays of random
// occupancy codes, widths, ray resets and bubbles, and supplies a random
// partial MI each cycle. Every valid cell must appear on mi_out exactly 18
// cycles after it entered, equal to the reference model applied to the
// partial MI of that cycle.
module tb_fcmi_core;
  import fcmi_pkg::*;
  import fcmi_ref_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid = 0, in_reset = 0, mi_valid;
  fx_t in_width = 0, mi_in = 0, mi_out, dth = 429;
  occ_t in_occ = 0;
  fcmi_core dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .in_reset(in_reset),
    .in_width(in_width), .in_occ(in_occ), .dtheta(dth), .mi_in(mi_in),
    .mi_valid(mi_valid), .mi_out(mi_out));
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
      int s, o;
      @(negedge clk);
      mi_in = fx_t'($urandom_range(0, 400000));
      #1;
      if (hist.size() == 18) begin
        e = hist.pop_front();
        checks++;
        if (mi_valid !== e.v || (e.v && mi_out !== ref_post(e.s, mi_in, dth))) begin
          failures++;
          if (failures < 10) $display("t=%0d got %0d/%0d want %0d/%0d", t, mi_valid, mi_out, e.v, ref_post(e.s, mi_in, dth));
        end
      end
      s = t % N_SLOTS;
      o = $urandom_range(0, 100);
      in_valid = (t < N_SLOTS) || ($urandom_range(0, 7) != 0);
      in_reset = in_valid && ((t < N_SLOTS) || $urandom_range(0, 40) == 0);
      in_occ   = occ_t'(o);
      in_width = fx_t'($urandom_range(4096, 5793));
      if (in_valid) st[s] = ref_fb(in_reset ? '0 : st[s], ref_pre(o, in_width));
      e.v = in_valid; e.s = st[s];
      hist.push_back(e);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
