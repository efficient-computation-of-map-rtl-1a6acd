// fcmi_preprocess: pipeline stages 3..10 of the FCMI core.
//
// From the LUT outputs of one cell (lambda, -log lambda, 1/lambda) and the
// cell width w it computes everything that does not depend on the previous
// cell of the ray:
//   L  = lambda w,  E = e^{-L} (piecewise linear; 1 for o = 0, 0 for o = 1),
//   g1 = 1 - E,  g2 = 1 - E(1+L),  g3 = 2 - E(L^2 + 2L + 2)
//   (the lower incomplete gamma functions gamma_1..3 at L),
//   ta = (1/lambda)(g3 - g2 log lambda),  tb = (1/lambda) g2,
//   tc = g2 - g1 log lambda,  td = g1.
// The two degenerate occupancies use exact values, as the source design
// handles them with precomputed results: o = 0 is recognised by its zero
// lambda and gets E = 1 (so all gamma terms vanish and the cell is fully
// transparent), o = 1 gets E = 0 through the full flag.
// The split into Preprocess (8 stages) and its purpose follow the source
// design; the order of operations over the 8 stages is this design's.
//
// Timing: fully pipelined, one cell per cycle, latency PRE_STAGES = 8 cycles.
// A valid bit and a ray-reset bit travel with each cell.
module fcmi_preprocess
  import fcmi_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_reset,
  input  lut_entry_t in_lut,
  input  logic       in_full,
  input  fx_t        in_w,
  output logic       out_valid,
  output logic       out_reset,
  output pre_t       out_pre
);
  // stage registers
  logic [PRE_STAGES-1:0] v, r;
  lut_entry_t lu [1:5];
  logic       fl [1:2];
  fx_t w [1:8];
  fx_t l [1:8];
  fx_t e [3:8];
  fx_t el1, l2, q, eq;
  fx_t g1 [4:8];
  fx_t g2 [5:8];
  fx_t t3, tcr, tar, tbr;
  fx_t xe;
  fx_t inv_d [0:1];
  fx_t tcr2;
  fx_t e_lin;

  exp_pwl u_exp (.x(l[2]), .y(e_lin));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v <= '0;
      r <= '0;
    end else begin
      v <= {v[PRE_STAGES-2:0], in_valid};
      r <= {r[PRE_STAGES-2:0], in_reset};
    end
  end

  always_ff @(posedge clk) begin
    // stage 3: L = lambda * w
    lu[1] <= in_lut;  fl[1] <= in_full;  w[1] <= in_w;
    l[1]  <= fx_mul(in_lut.lam, in_w);
    // stage 4: register L for the exponential
    lu[2] <= lu[1];   fl[2] <= fl[1];    w[2] <= w[1];  l[2] <= l[1];
    // stage 5: E = e^{-L}
    lu[3] <= lu[2];   w[3] <= w[2];      l[3] <= l[2];
    e[3]  <= fl[2] ? '0 : ((lu[2].lam == '0) ? FX_ONE : e_lin);
    // stage 6: E(1+L), L^2, g1
    lu[4] <= lu[3];   w[4] <= w[3];      l[4] <= l[3];  e[4] <= e[3];
    el1   <= fx_mul(e[3], FX_ONE + l[3]);
    l2    <= fx_mul(l[3], l[3]);
    g1[4] <= FX_ONE - e[3];
    // stage 7: q = L^2 + 2L + 2, g2
    lu[5] <= lu[4];   w[5] <= w[4];      l[5] <= l[4];  e[5] <= e[4];  g1[5] <= g1[4];
    q     <= l2 + (l[4] <<< 1) + FX_TWO;
    g2[5] <= FX_ONE - el1;
    // stage 8: E q
    w[6]  <= w[5];    l[6] <= l[5];      e[6] <= e[5];  g1[6] <= g1[5];  g2[6] <= g2[5];
    eq    <= fx_mul(e[5], q);
    xe    <= lu[5].nlog;
    // stage 9: g3, t3 = g3 + g2 (-log lambda), tc = g2 + g1 (-log lambda)
    w[7]  <= w[6];    l[7] <= l[6];      e[7] <= e[6];  g1[7] <= g1[6];  g2[7] <= g2[6];
    t3    <= (FX_TWO - eq) + fx_mul(g2[6], xe);
    tcr   <= g2[6] + fx_mul(g1[6], xe);
    // stage 10: ta = inv * t3, tb = inv * g2
    w[8]  <= w[7];    l[8] <= l[7];      e[8] <= e[7];  g1[8] <= g1[7];  g2[8] <= g2[7];
    tar   <= fx_mul(inv_d[1], t3);
    tbr   <= fx_mul(inv_d[1], g2[7]);
    tcr2  <= tcr;
    // 1/lambda travels alongside from stage 7
    inv_d[0] <= lu[5].inv;
    inv_d[1] <= inv_d[0];
  end

  assign out_valid  = v[PRE_STAGES-1];
  assign out_reset  = r[PRE_STAGES-1];
  assign out_pre.e  = e[8];
  assign out_pre.l  = l[8];
  assign out_pre.w  = w[8];
  assign out_pre.ta = tar;
  assign out_pre.tb = tbr;
  assign out_pre.tc = tcr2;
  assign out_pre.td = g1[8];
endmodule
