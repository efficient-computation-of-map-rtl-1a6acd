// fcmi_top: the FCMI mutual-information accelerator.
//
// Computes, for every cell of an occupancy grid of up to 512 x 512 cells,
// the Shannon mutual information between the map and a range scan taken at
// that cell, summed over a set of ray angles, using the recursive FCMI
// formulation. Sixteen cores each interleave eight rays; a Bresenham ray
// caster and sixteen address translation units produce, every cycle, sixteen
// cells that lie on one map row or column, and the diagonally banked memory
// serves all of them in the same cycle through the two crossbars. The block
// structure follows Fig. 1 of the source design.
//
// Host interface: write the angle table (cfg_*), set map_w/map_h, n_rays and
// dtheta, load occupancy codes (0..100 = probability in percent) with
// occ_we, pulse start, wait for done; then read the MI map with mi_re
// (data on mi_rdata one cycle later). Host accesses are for idle periods.
// cycles reports the length of the last computation.
//
// Timing: ray-caster command in cycle T, ATU request in T+1 = R, occupancy
// at the cores in R+1, partial MI read in R+18, updated MI written in R+19.
//
// From the source design: the block set and their connections, 16 cores,
// the 512 x 512 maximum map, the 32-bit Q20.12 number format and the
// 100 MHz single clock. This design's own choices: the host interface, the
// MI clear before each run, padding the map to a multiple of 16 so that no
// bank conflict (and hence no stall) can occur, and the exact timing above.
//
// The concurrent assertion at the end checks that every core's MI write
// lands on the bank the memory side expects; it is disabled while rst_n is
// low, which is why lint reports rst_n as used both as an asynchronous
// reset and as a plain signal. That is intended.
module fcmi_top
  import fcmi_pkg::*;
#(
  parameter int    MAX_RAYS = 64,
  parameter string LUT_FILE = "rtl/occ_lut.hex"
) (
  input  logic       clk,
  input  logic       rst_n,
  // configuration
  input  coord_t     map_w,
  input  coord_t     map_h,
  input  logic [$clog2(MAX_RAYS):0] n_rays,
  input  fx_t        dtheta,
  input  logic       cfg_we,
  input  logic [$clog2(MAX_RAYS)-1:0] cfg_idx,
  input  angle_cfg_t cfg_data,
  // host map access
  input  logic       occ_we,
  input  coord_t     host_x,
  input  coord_t     host_y,
  input  occ_t       occ_wdata,
  input  logic       mi_re,
  output fx_t        mi_rdata,
  // control and status
  input  logic       start,
  output logic       busy,
  output logic       done,
  output logic [31:0] cycles,
  output logic       bypass      // an MI read was served from a same-cycle write
);
  localparam int N = N_CORES;

  coord_t pad_w, pad_h, a_base, a_nmaj, a_pmin;
  logic run, a_req, a_valid, rc_idle, clr_en;
  angle_cfg_t a_cfg;
  addr_t clr_addr;
  ray_cmd_t cmd;

  control_fsm #(.MAX_RAYS(MAX_RAYS)) u_fsm (
    .clk(clk), .rst_n(rst_n), .start(start), .map_w(map_w), .map_h(map_h),
    .n_rays(n_rays), .cfg_we(cfg_we), .cfg_idx(cfg_idx), .cfg_data(cfg_data),
    .pad_w(pad_w), .pad_h(pad_h), .run(run), .alloc_req(a_req),
    .alloc_valid(a_valid), .alloc_cfg(a_cfg), .alloc_base(a_base),
    .alloc_nmaj(a_nmaj), .alloc_pmin(a_pmin), .rc_idle(rc_idle),
    .clr_en(clr_en), .clr_addr(clr_addr), .busy(busy), .done(done), .cycles(cycles));

  ray_caster u_rc (
    .clk(clk), .rst_n(rst_n), .run(run), .alloc_req(a_req), .alloc_valid(a_valid),
    .alloc_cfg(a_cfg), .alloc_base(a_base), .alloc_nmaj(a_nmaj), .alloc_pmin(a_pmin),
    .cmd(cmd), .idle(rc_idle));

  mem_req_t req [N];
  logic     ray_reset [N];
  fx_t      width [N];
  occ_t     occ_data [N];
  fx_t      mi_rd [N];
  fx_t      mi_wd [N];
  logic     mi_wv [N];
  logic     wr_exp [N];

  for (genvar c = 0; c < N; c++) begin : g_core
    atu #(.CORE_ID(c)) u_atu (
      .clk(clk), .rst_n(rst_n), .cmd(cmd), .map_w(map_w), .map_h(map_h),
      .pad_w(pad_w), .pad_h(pad_h), .req(req[c]), .ray_reset(ray_reset[c]),
      .width(width[c]));

    // align the ATU's flags with the occupancy word (one cycle of bank read)
    logic cv, cr;
    fx_t  cw;
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cv <= 1'b0; cr <= 1'b0;
      end else begin
        cv <= req[c].valid; cr <= ray_reset[c];
      end
    end
    always_ff @(posedge clk) cw <= width[c];

    fcmi_core #(.LUT_FILE(LUT_FILE)) u_core (
      .clk(clk), .rst_n(rst_n), .in_valid(cv), .in_reset(cr), .in_width(cw),
      .in_occ(occ_data[c]), .dtheta(dtheta), .mi_in(mi_rd[c]),
      .mi_valid(mi_wv[c]), .mi_out(mi_wd[c]));
  end

  mem_subsystem #(.N(N)) u_mem (
    .clk(clk), .rst_n(rst_n), .req(req), .occ_data(occ_data), .mi_rdata(mi_rd),
    .mi_wdata(mi_wd), .host_occ_we(occ_we), .host_x(host_x), .host_y(host_y),
    .host_occ_wdata(occ_wdata), .host_mi_re(mi_re), .host_mi_rdata(mi_rdata),
    .clr_en(clr_en), .clr_addr(clr_addr), .wr_expect(wr_exp), .bypass_any(bypass));

  // a core produces an update exactly when its bank expects the write
  for (genvar c = 0; c < N; c++) begin : g_chk
    assert property (@(posedge clk) disable iff (!rst_n) mi_wv[c] == wr_exp[c])
      else $error("core %0d update out of step with its bank", c);
  end
endmodule
