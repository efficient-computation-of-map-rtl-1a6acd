// fcmi_feedback: pipeline stages 11..18 of the FCMI core, the recursive part.
//
// For each cell it updates the four expectations of its ray,
//   alpha0 = E (alpha0' + L beta0') + tc
//   beta0  = E beta0' + td
//   beta1  = E (beta1' + w beta0') + tb
//   alpha1 = E (alpha1' + L beta1' + w (alpha0' + L beta0')) + ta,
// where the primed values belong to the previous cell of the same ray and
// E, L, w, ta..td come from Preprocess. The previous values are taken from
// the output of the last stage (the loop of Fig. 2(a) in the source design);
// a ray-reset input selects the reset values instead, at the first cell of a
// ray. The loop spans exactly FB_STAGES = 8 registers, so with 8 rays
// interleaved in turn the output of stage 18 in a cycle is always the
// previous cell of the ray entering stage 11 in that cycle (Fig. 2(c)). An
// invalid slot (a bubble) passes its ray's state round the loop unchanged.
// Reset values of zero and the order of operations inside the 8 stages are
// this design's choices.
//
// Timing: one cell per cycle, latency 8; out_* belong to the cell that
// entered 8 cycles earlier.
module fcmi_feedback
  import fcmi_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  logic      in_reset,
  input  pre_t      in_pre,
  output logic      out_valid,
  output fb_state_t out_state
);
  fb_state_t s [1:8];          // state entering the update (old) per stage
  pre_t      p [1:5];
  logic [FB_STAGES-1:0] v;
  fx_t lb0, wb0, lb1;
  fx_t u2, v2, lb1_2;
  fx_t u3, v3, lb1_3, wu3;
  fx_t u4, v4, p4;
  fx_t ep5, eu5, ev5, eb5;
  fb_state_t n6, n7;
  fb_state_t sel;

  // ray-reset mux in front of the loop
  always_comb sel = in_reset ? FB_RESET : s[8];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[FB_STAGES-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    // stage 11: products with the previous state
    s[1] <= in_valid ? sel : s[8];
    p[1] <= in_pre;
    lb0  <= fx_mul(in_pre.l, sel.b0);
    wb0  <= fx_mul(in_pre.w, sel.b0);
    lb1  <= fx_mul(in_pre.l, sel.b1);
    // stage 12: u = alpha0' + L beta0', v = beta1' + w beta0'
    s[2] <= s[1];  p[2] <= p[1];
    u2   <= s[1].a0 + lb0;
    v2   <= s[1].b1 + wb0;
    lb1_2 <= lb1;
    // stage 13: w u
    s[3] <= s[2];  p[3] <= p[2];
    u3 <= u2;  v3 <= v2;  lb1_3 <= lb1_2;
    wu3 <= fx_mul(p[2].w, u2);
    // stage 14: p = alpha1' + L beta1' + w u
    s[4] <= s[3];  p[4] <= p[3];
    u4 <= u3;  v4 <= v3;
    p4 <= s[3].a1 + lb1_3 + wu3;
    // stage 15: multiply by E
    s[5] <= s[4];  p[5] <= p[4];
    ep5 <= fx_mul(p[4].e, p4);
    eu5 <= fx_mul(p[4].e, u4);
    ev5 <= fx_mul(p[4].e, v4);
    eb5 <= fx_mul(p[4].e, s[4].b0);
    // stage 16: add the preprocess terms
    s[6] <= s[5];
    n6.a1 <= ep5 + p[5].ta;
    n6.b1 <= ev5 + p[5].tb;
    n6.a0 <= eu5 + p[5].tc;
    n6.b0 <= eb5 + p[5].td;
    // stage 17: a bubble keeps the old state
    s[7] <= s[6];
    n7   <= v[5] ? n6 : s[6];
    // stage 18: loop register
    s[8] <= n7;
  end

  assign out_valid = v[FB_STAGES-1];
  assign out_state = s[8];
endmodule
