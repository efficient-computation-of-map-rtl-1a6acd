// tb_fcmi_full: end-to-end runs of the accelerator at its default
// parameters on the map sizes evaluated for the design: 201 x 201, 256 x 256
// and 512 x 512 cells (the largest the memories hold), each with 60 ray
// angles over the full circle. For each size the occupancy grid is random
// (free, unknown, occupied and the degenerate codes 0 and 100), every MI
// word is compared with the reference model, and the cycle count is checked
// against clear + ceil(groups / 8) * 8 * ray length and reported as latency
// at 100 MHz next to the bound H*H*rays/16. The mechanism counters of
// tb_fcmi_top are checked over the whole run.
module tb_fcmi_full;
  import fcmi_pkg::*;
  import fcmi_ref_pkg::*;

  localparam int NCASE = 3;
  localparam int SIZES [NCASE] = '{201, 256, 512};
  localparam int NR = 60;
  int W, H;
  localparam real PHASE = 0.37;
  localparam longint WATCHDOG = 3000000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t map_w = 0, map_h = 0;
  logic [6:0] n_rays = 7'(NR);
  fx_t dtheta;
  logic cfg_we = 0; logic [5:0] cfg_idx = 0; angle_cfg_t cfg_data = '0;
  logic occ_we = 0, mi_re = 0, start = 0;
  coord_t hx = 0, hy = 0; occ_t occ_wdata = 0;
  fx_t mi_rdata; logic busy, done, bypass; logic [31:0] cycles;

  fcmi_top dut (
    .clk(clk), .rst_n(rst_n), .map_w(map_w), .map_h(map_h), .n_rays(n_rays),
    .dtheta(dtheta), .cfg_we(cfg_we), .cfg_idx(cfg_idx), .cfg_data(cfg_data),
    .occ_we(occ_we), .host_x(hx), .host_y(hy), .occ_wdata(occ_wdata),
    .mi_re(mi_re), .mi_rdata(mi_rdata), .start(start), .busy(busy),
    .done(done), .cycles(cycles), .bypass(bypass));

  int checks = 0, failures = 0;
  longint cyc = 0;
  always @(posedge clk) cyc++;
  initial begin
    #(WATCHDOG * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  int n_bypass = 0, n_reset = 0, n_bubble = 0, n_full_slots = 0, n_mixed = 0, n_clear = 0;
  always @(posedge clk) if (rst_n) begin
    int act, ax;
    bit mixed;
    if (bypass) n_bypass++;
    if (dut.u_fsm.clr_en) n_clear++;
    act = 0; mixed = 0; ax = -1;
    for (int s = 0; s < N_SLOTS; s++) if (dut.u_rc.ctx[s].active) begin
      act++;
      if (ax >= 0 && dut.u_rc.ctx[s].cfg != dut.u_rc.ctx[0].cfg) mixed = 1;
      ax = 1;
    end
    if (act == N_SLOTS) n_full_slots++;
    if (mixed) n_mixed++;
  end

  int c_reset [N_CORES], c_bubble [N_CORES];
  for (genvar c = 0; c < N_CORES; c++) begin : g_cnt
    initial begin c_reset[c] = 0; c_bubble[c] = 0; end
    always @(posedge clk) if (rst_n) begin
      if (dut.g_core[c].cr) c_reset[c]++;
      if (dut.cmd.valid && !dut.g_core[c].u_atu.valid) c_bubble[c]++;
    end
  end

  angle_cfg_t ang [];
  int occ [];
  fx_t ref_mi [];
  int r_resets = 0, r_wraps = 0;

  int ncell0 = 0, ncell100 = 0;
  task automatic run_case();
    int groups, expect_cyc;
    dtheta = fx_t'($rtoi(2.0 * 3.14159265358979 / NR * 4096.0 + 0.5));
    ang = new[NR];
    for (int k = 0; k < NR; k++) ang[k] = ref_angle(k, NR, PHASE);
    occ = new[W*H];
    ref_mi = new[W*H];
    for (int i = 0; i < W*H; i++) begin
      int r;
      r = $urandom_range(0, 99);
      if (r < 30)      occ[i] = 50;
      else if (r < 55) occ[i] = $urandom_range(0, 10);
      else if (r < 80) occ[i] = $urandom_range(85, 100);
      else             occ[i] = $urandom_range(0, 100);
    end
    occ[0] = 0; occ[1] = 100;
    foreach (occ[i]) begin
      if (occ[i] == 0) ncell0++;
      if (occ[i] == 100) ncell100++;
    end
    ref_map(W, H, NR, ang, dtheta, occ, ref_mi, r_resets, r_wraps);

    map_w <= coord_t'(W); map_h <= coord_t'(H);
    @(posedge clk);
    for (int k = 0; k < NR; k++) begin
      cfg_we <= 1; cfg_idx <= 6'(k); cfg_data <= ang[k];
      @(posedge clk);
    end
    cfg_we <= 0;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        occ_we <= 1; hx <= coord_t'(x); hy <= coord_t'(y); occ_wdata <= occ_t'(occ[y*W + x]);
        @(posedge clk);
      end
    occ_we <= 0;
    @(posedge clk);
    start <= 1;
    @(posedge clk);
    start <= 0;
    wait (done);
    @(posedge clk);
    // read back and compare
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        mi_re <= 1; hx <= coord_t'(x); hy <= coord_t'(y);
        @(posedge clk);
        mi_re <= 0;
        #1;
        checks++;
        if (mi_rdata !== ref_mi[y*W + x]) begin
          failures++;
          if (failures < 10)
            $display("MI mismatch at (%0d,%0d): got %0d expected %0d", x, y, mi_rdata, ref_mi[y*W + x]);
        end
      end
    begin
      longint sum; fx_t mx;
      sum = 0; mx = 0;
      foreach (ref_mi[i]) begin sum += ref_mi[i]; if (ref_mi[i] > mx) mx = ref_mi[i]; end
      $display("reference MI: mean %0.4f max %0.4f", real'(sum) / (W*H) / 4096.0, real'(mx) / 4096.0);
    end
    // latency
    groups = 0;
    for (int k = 0; k < NR; k++)
      groups += (ang[k].axis_y ? (W + 15) / 16 : (H + 15) / 16);
    expect_cyc = H * ((W + 15) / 16) + (groups + N_SLOTS - 1) / N_SLOTS * N_SLOTS * H;
    checks++;
    if (!(cycles >= expect_cyc && cycles <= expect_cyc + 48)) begin
      failures++;
      $display("cycle count %0d, expected %0d..%0d", cycles, expect_cyc, expect_cyc + 48);
    end
    $display("map %0dx%0d, %0d rays: %0d cycles (%0.3f ms at 100 MHz), bound H*H*rays/16 = %0d",
             W, H, NR, cycles, cycles / 1.0e5, W * H * NR / 16);
  endtask

  initial begin
    ref_load("rtl/occ_lut.hex");
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < NCASE; n++) begin
      W = SIZES[n]; H = SIZES[n];
      run_case();
    end
    // mechanisms
    foreach (c_reset[c]) begin n_reset += c_reset[c]; n_bubble += c_bubble[c]; end
    $display("ray resets %0d (ref %0d, wraps %0d), bubbles %0d, bypasses %0d, full-slot cycles %0d, mixed-angle cycles %0d, clear cycles %0d, o=0 cells %0d, o=1 cells %0d",
             n_reset, r_resets, r_wraps, n_bubble, n_bypass, n_full_slots, n_mixed, n_clear, ncell0, ncell100);
    checks++; if (n_reset != r_resets) begin failures++; $display("reset count differs"); end
    checks++; if (r_wraps == 0)      begin failures++; $display("no wrap-around occurred"); end
    checks++; if (n_bubble == 0)     begin failures++; $display("no padding bubble occurred"); end
    checks++; if (n_bypass == 0)     begin failures++; $display("no MI bypass occurred"); end
    checks++; if (n_full_slots == 0) begin failures++; $display("never 8 slots active"); end
    checks++; if (n_mixed == 0)      begin failures++; $display("slots never on different angles"); end
    checks++; if (n_clear == 0)      begin failures++; $display("no clear phase"); end
    checks++; if (ncell0 == 0 || ncell100 == 0) begin failures++; $display("no degenerate cells"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
