// tb_fcmi_accuracy: accuracy of the fixed-point datapath against exact FCMI.
//
// Builds a 201 x 201 occupancy grid that looks like a partly explored
// building: unknown cells (o = 0.5) outside the explored disc, free cells
// with low occupancy inside it, walls of rooms and a few pillars with high
// occupancy (including o = 1), runs the accelerator with 60 rays at its
// default parameters, and compares the MI map with a double-precision
// evaluation of the same recursion (exact logarithms, exponential and
// incomplete gamma functions, Lambda = 1e7), walked over the same cells.
// Both maps are normalised to [0, 1] by their maxima. The cell order of the
// rays is the hardware's in both, so only the arithmetic is compared.
//
// Two maps are run. In the first, every occupancy lies on the 0.1 grid of
// the source design's quantisation (free cells 0, 0.1, 0.2; walls 0.9, 1):
// the check is that no cell differs by 0.05 or more, the accuracy the
// original implementation reports against its floating-point software. In
// the second, free cells use the fine codes 0.01..0.06. For such small
// lambda*w the piecewise-linear exponential's error is magnified by the
// cancellation in 1 - E(1+L) and 2 - E(L^2+2L+2); that error is only
// reported, not checked.
module tb_fcmi_accuracy;
  import fcmi_pkg::*;
  import fcmi_ref_pkg::*;

  localparam int W  = 201;
  localparam int H  = 201;
  localparam int NR = 60;
  localparam real PHASE = 0.37;
  localparam real TOL = 0.05;
  localparam longint WATCHDOG = 1000000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  coord_t map_w = coord_t'(W), map_h = coord_t'(H);
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
  initial begin
    #(WATCHDOG * 10);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  typedef struct { real a1, b1, a0, b0; } rstate_t;

  // One cell of Eq. 3 in double precision.
  function automatic rstate_t exact_step(rstate_t s, int code, real w);
    rstate_t n;
    real o, lam, lnl, l, e, g1, g2, g3;
    o = code / 100.0;
    if (code == 0) begin
      n.a1 = s.a1 + w * s.a0; n.b1 = s.b1 + w * s.b0;
      n.a0 = s.a0;            n.b0 = s.b0;
      return n;
    end
    lam = (code >= 100) ? 1.0e7 : -$ln(1.0 - o);
    if (lam > 1.0e7) lam = 1.0e7;
    lnl = $ln(lam);
    l  = lam * w;
    e  = (l > 700.0) ? 0.0 : $exp(-l);
    g1 = 1.0 - e;
    g2 = 1.0 - e * (1.0 + l);
    g3 = 2.0 - e * (l * l + 2.0 * l + 2.0);
    n.a1 = e * ((s.a1 + l * s.b1) + w * (s.a0 + l * s.b0)) + (g3 - g2 * lnl) / lam;
    n.b1 = e * (s.b1 + w * s.b0) + g2 / lam;
    n.a0 = e * (s.a0 + l * s.b0) + g2 - g1 * lnl;
    n.b0 = e * s.b0 + g1;
    return n;
  endfunction

  // Same traversal as the hardware (edge origins, Bresenham, wrap, restart).
  function automatic void exact_map(angle_cfg_t ang [], real dth, ref int occ [], ref real mi []);
    int pw, ph;
    real klog;
    klog = $ln(1.0e7) - 1.0;
    pw = (W + 15) / 16 * 16;
    ph = (H + 15) / 16 * 16;
    foreach (mi[i]) mi[i] = 0.0;
    for (int a = 0; a < NR; a++) begin
      angle_cfg_t c;
      int nmaj, nmin, pmin;
      real w;
      c = ang[a];
      w = real'(c.width) / 4096.0;
      nmaj = c.axis_y ? H : W;
      nmin = c.axis_y ? W : H;
      pmin = c.axis_y ? pw : ph;
      for (int r = 0; r < pmin; r++) begin
        rstate_t st;
        int d, off, prev_m;
        bit prev_ok;
        st = '{0.0, 0.0, 0.0, 0.0};
        d = 2 * c.dmin - c.dmaj; off = 0; prev_ok = 0; prev_m = -1;
        for (int k = 0; k < nmaj; k++) begin
          int m, maj, x, y;
          bit ok, jump;
          m   = c.min_neg ? r - off : r + off;
          m   = ((m % pmin) + pmin) % pmin;
          maj = c.maj_neg ? nmaj - 1 - k : k;
          ok  = (m < nmin);
          jump = (prev_m >= 0) && (m - prev_m > 1 || prev_m - m > 1);
          if (ok) begin
            x = c.axis_y ? m : maj;
            y = c.axis_y ? maj : m;
            if (k == 0 || !prev_ok || jump) st = '{0.0, 0.0, 0.0, 0.0};
            st = exact_step(st, occ[y*W + x], w);
            mi[y*W + x] += dth * (st.a1 + klog * st.b1);
          end
          prev_ok = ok; prev_m = m;
          if (d > 0) begin off++; d -= 2 * c.dmaj; end
          d += 2 * c.dmin;
        end
      end
    end
  endfunction

  angle_cfg_t ang [];
  int occ [];
  real ex_mi [];
  fx_t hw_mi [];

  task automatic run_map(bit fine);
    real ex_max, hw_max, worst, sum_err;
    int worst_i;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        int dx, dy, code;
        dx = x - 100; dy = y - 100;
        if (dx*dx + dy*dy > 75*75) code = 50;                        // unknown
        else code = fine ? $urandom_range(0, 6) : $urandom_range(0, 2) * 10; // free
        if ((x == 30 || x == 170 || y == 30 || y == 170) && x >= 30 && x <= 170 && y >= 30 && y <= 170)
          code = fine ? $urandom_range(95, 100) : $urandom_range(9, 10) * 10; // outer walls
        if (x == 100 && (y < 85 || y > 115) && y >= 30 && y <= 170)
          code = fine ? $urandom_range(90, 100) : $urandom_range(9, 10) * 10;
        if (y == 100 && (x < 60 || x > 140) && x >= 30 && x <= 170)
          code = fine ? $urandom_range(90, 100) : $urandom_range(9, 10) * 10;
        if ((x - 65) * (x - 65) + (y - 135) * (y - 135) < 16) code = 100; // pillar
        if (x >= 130 && x < 136 && y >= 55 && y < 61) code = 100;           // box
        occ[y*W + x] = code;
      end
    exact_map(ang, real'(dtheta) / 4096.0, occ, ex_mi);

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
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        mi_re <= 1; hx <= coord_t'(x); hy <= coord_t'(y);
        @(posedge clk);
        mi_re <= 0;
        #1;
        hw_mi[y*W + x] = mi_rdata;
      end

    ex_max = 0.0; hw_max = 0.0;
    foreach (ex_mi[i]) begin
      if (ex_mi[i] > ex_max) ex_max = ex_mi[i];
      if (real'(hw_mi[i]) / 4096.0 > hw_max) hw_max = real'(hw_mi[i]) / 4096.0;
    end
    checks++;
    if (!(ex_max > 0.0 && hw_max > 0.0)) begin failures++; $display("MI map is zero"); end
    checks++;
    if (cycles == 0) begin failures++; $display("no cycle count"); end
    worst = 0.0; worst_i = 0; sum_err = 0.0;
    foreach (ex_mi[i]) begin
      real e;
      e = real'(hw_mi[i]) / 4096.0 / hw_max - ex_mi[i] / ex_max;
      if (e < 0.0) e = -e;
      sum_err += e;
      if (e > worst) begin worst = e; worst_i = i; end
      if (!fine) checks++;
      if (!fine && e >= TOL) begin
        failures++;
        if (failures < 10)
          $display("cell (%0d,%0d): normalised MI %0.4f, exact %0.4f",
                   i % W, i / W, real'(hw_mi[i]) / 4096.0 / hw_max, ex_mi[i] / ex_max);
      end
    end
    $display("%s map: MI max hardware %0.3f, exact %0.3f; normalised error max %0.4f at (%0d,%0d), mean %0.5f",
             fine ? "fine-code" : "0.1-grid", hw_max, ex_max, worst, worst_i % W, worst_i / W, sum_err / (W*H));
  endtask

  initial begin
    real dth;
    dth = 2.0 * 3.14159265358979 / NR;
    dtheta = fx_t'($rtoi(dth * 4096.0 + 0.5));
    ang = new[NR];
    for (int k = 0; k < NR; k++) ang[k] = ref_angle(k, NR, PHASE);
    occ = new[W*H];
    ex_mi = new[W*H];
    hw_mi = new[W*H];
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int k = 0; k < NR; k++) begin
      cfg_we <= 1; cfg_idx <= 6'(k); cfg_data <= ang[k];
      @(posedge clk);
    end
    cfg_we <= 0;
    run_map(1'b0);
    run_map(1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
