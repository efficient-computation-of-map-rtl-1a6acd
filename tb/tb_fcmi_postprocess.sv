// tb_fcmi_postprocess: random expectations, partial MI and angular step;
// the output must equal mi + dtheta * (alpha1 + (ln 1e7 - 1) beta1) as
// computed by the reference model, and track a real-valued estimate.
module tb_fcmi_postprocess;
  import fcmi_pkg::*;
  import fcmi_ref_pkg::*;
  fb_state_t st; fx_t mi_in, dth, mi_out;
  fcmi_postprocess dut (.st(st), .mi_in(mi_in), .dtheta(dth), .mi_out(mi_out));
  int checks = 0, failures = 0;
  initial begin
    for (int i = 0; i < 2000; i++) begin
      real want;
      st.a1 = fx_t'($urandom_range(0, 200000)) - 100000;
      st.b1 = fx_t'($urandom_range(0, 20000));
      st.a0 = fx_t'($urandom);
      st.b0 = fx_t'($urandom);
      mi_in = fx_t'($urandom_range(0, 1000000));
      dth   = fx_t'($urandom_range(1, 2000));
      #1;
      want = mi_in / 4096.0 + dth / 4096.0 * (st.a1 / 4096.0 + ($ln(1.0e7) - 1.0) * st.b1 / 4096.0);
      checks++;
      if (mi_out !== ref_post(st, mi_in, dth) || (mi_out / 4096.0 - want) > 0.01 || (want - mi_out / 4096.0) > 0.01) begin
        failures++;
        if (failures < 10) $display("got %0d want %0d (%f)", mi_out, ref_post(st, mi_in, dth), want * 4096);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
