// fcmi_core: one FCMI computation core, a 19-stage pipeline.
//
// Each cycle the core takes one cell of one ray: its occupancy code, the
// cell width of the ray, a ray-reset flag and a valid flag. Stages 1-2 are
// the interface and the occupancy LUT, stages 3-10 Preprocess, 11-18 the
// Feedback loop and stage 19 Postprocess, as in the source design. Eight rays
// are interleaved in turn, one per cycle, so the 8-stage feedback loop never
// stalls; the caller must issue cells of one ray exactly every 8 cycles
// (inserting bubbles with in_valid = 0 where a ray has no cell).
//
// Timing: a cell presented in cycle t is in stage 18 in cycle t+18. In that
// cycle the caller supplies the cell's partial MI on mi_in, and mi_out /
// mi_valid hold the updated MI to be written back in the same cycle.
module fcmi_core
  import fcmi_pkg::*;
#(
  parameter string LUT_FILE = "rtl/occ_lut.hex"
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_reset,
  input  fx_t  in_width,
  input  occ_t in_occ,
  input  fx_t  dtheta,
  input  fx_t  mi_in,
  output logic mi_valid,
  output fx_t  mi_out
);
  // stage 1: interface register
  logic v1, r1, v2, r2;
  fx_t  w1, w2;
  occ_t o1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; r1 <= 1'b0; v2 <= 1'b0; r2 <= 1'b0;
    end else begin
      v1 <= in_valid; r1 <= in_reset & in_valid;
      v2 <= v1;       r2 <= r1;
    end
  end
  always_ff @(posedge clk) begin
    w1 <= in_width; o1 <= in_occ;
    w2 <= w1;
  end

  // stage 2: core LUTs
  lut_entry_t lut_q;
  logic       full_q;
  core_lut #(.LUT_FILE(LUT_FILE)) u_lut (
    .clk(clk), .en(1'b1), .occ(o1), .entry(lut_q), .full(full_q));

  // stages 3-10
  logic pv, pr;
  pre_t pre;
  fcmi_preprocess u_pre (
    .clk(clk), .rst_n(rst_n), .in_valid(v2), .in_reset(r2), .in_lut(lut_q),
    .in_full(full_q), .in_w(w2), .out_valid(pv), .out_reset(pr), .out_pre(pre));

  // stages 11-18
  fb_state_t st;
  fcmi_feedback u_fb (
    .clk(clk), .rst_n(rst_n), .in_valid(pv), .in_reset(pr), .in_pre(pre),
    .out_valid(mi_valid), .out_state(st));

  // stage 19
  fcmi_postprocess u_post (.st(st), .mi_in(mi_in), .dtheta(dtheta), .mi_out(mi_out));
endmodule
