// fcmi_postprocess: stage 19 of the FCMI core.
//
// Adds the mutual information of this ray at the cell to the partial MI read
// from the MI map:
//   mi_out = mi_in + dtheta * (alpha1 + (log Lambda - 1) beta1),
// i.e. h(Z) - h(Z|M) with h(Z) ~ alpha1 dtheta and
// h(Z|M) ~ (1 - log Lambda) beta1 dtheta, Lambda = 1e7. The formula is the
// source design's; applying the angular step once per ray is this design's
// reading of its equations. Only alpha1 and beta1 enter the MI; alpha0 and
// beta0 of the state input are used only inside the feedback loop, so lint
// reports those bits as unused here.
//
// Timing: combinational. The MI bank's write register acts as the stage-19
// register, so the result is written at the end of the cycle in which the
// partial MI arrives.
module fcmi_postprocess
  import fcmi_pkg::*;
(
  input  fb_state_t st,
  input  fx_t       mi_in,
  input  fx_t       dtheta,
  output fx_t       mi_out
);
  fx_t gain;
  always_comb begin
    gain   = st.a1 + fx_mul(K_LOGL_M1, st.b1);
    mi_out = mi_in + fx_mul(dtheta, gain);
  end
endmodule
