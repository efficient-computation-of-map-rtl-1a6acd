// tb_control_fsm: a 40 x 20 map with three angles (steep, shallow, steep).
// Checks the clear phase (20 rows x 3 words, addresses y*32 + j), the order
// of the ray groups handed out (angle by angle, minor origins 0, 16, 32
// for steep angles over the padded width 48 and 0, 16 for the shallow
// angle over the padded height 32, with ray length and padded size), that
// the run ends once the ray caster reports idle, the done pulse, busy, and
// the reported cycle count; a table write while busy must be ignored.
module tb_control_fsm;
  import fcmi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, cfg_we = 0, alloc_req = 0, rc_idle = 0;
  logic [6:0] n_rays = 3; logic [5:0] cfg_idx = 0; angle_cfg_t cfg_data = '0;
  coord_t map_w = 40, map_h = 20, pad_w, pad_h, alloc_base, alloc_nmaj, alloc_pmin;
  logic run, alloc_valid, clr_en, busy, done; angle_cfg_t alloc_cfg; addr_t clr_addr;
  logic [31:0] cycles;
  control_fsm dut (.clk(clk), .rst_n(rst_n), .start(start), .map_w(map_w), .map_h(map_h),
    .n_rays(n_rays), .cfg_we(cfg_we), .cfg_idx(cfg_idx), .cfg_data(cfg_data), .pad_w(pad_w),
    .pad_h(pad_h), .run(run), .alloc_req(alloc_req), .alloc_valid(alloc_valid),
    .alloc_cfg(alloc_cfg), .alloc_base(alloc_base), .alloc_nmaj(alloc_nmaj),
    .alloc_pmin(alloc_pmin), .rc_idle(rc_idle), .clr_en(clr_en), .clr_addr(clr_addr),
    .busy(busy), .done(done), .cycles(cycles));
  int checks = 0, failures = 0;
  angle_cfg_t tbl [3];
  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int nclr, na, t0, tdone;
    int exp_a [8], exp_b [8];
    exp_a = '{0, 0, 0, 1, 1, 2, 2, 2};
    exp_b = '{0, 16, 32, 0, 16, 0, 16, 32};
    for (int k = 0; k < 3; k++) begin
      tbl[k] = '0; tbl[k].axis_y = (k != 1); tbl[k].dmaj = coord_t'(100 + k); tbl[k].width = fx_t'(4096 + k);
    end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < 3; k++) begin
      @(negedge clk); cfg_we = 1; cfg_idx = 6'(k); cfg_data = tbl[k];
    end
    @(negedge clk); cfg_we = 0;
    chk(pad_w == 48 && pad_h == 32, "padded size");
    chk(!busy, "idle before start");
    start = 1; @(negedge clk); start = 0; t0 = 0;
    nclr = 0; na = 0; t0 = 1;
    // a table write while busy is ignored
    cfg_we = 1; cfg_idx = 0; cfg_data = '1;
    while (!run) begin
      if (nclr == 1) cfg_we = 0;
      if (clr_en) begin
        chk(clr_addr == addr_t'((nclr / 3) * 32 + nclr % 3), $sformatf("clear address %0d", nclr));
        nclr++;
      end
      @(negedge clk); t0++;
    end
    chk(nclr == 60, $sformatf("clear words %0d", nclr));
    // hand out groups on every other cycle
    while (alloc_valid) begin
      alloc_req = (t0 % 2 == 0);
      if (alloc_req) begin
        chk(na < 8 && alloc_cfg == tbl[exp_a[na]] && alloc_base == coord_t'(exp_b[na]) &&
            alloc_nmaj == (exp_a[na] == 1 ? coord_t'(40) : coord_t'(20)) &&
            alloc_pmin == (exp_a[na] == 1 ? coord_t'(32) : coord_t'(48)), $sformatf("group %0d", na));
        na++;
      end
      @(negedge clk); t0++;
    end
    alloc_req = 0;
    chk(na == 8, $sformatf("groups handed out %0d", na));
    repeat (5) begin chk(run, "waits for ray caster"); @(negedge clk); t0++; end
    rc_idle = 1;
    tdone = 0;
    while (!done && tdone < 100) begin @(negedge clk); t0++; tdone++; end
    chk(done, "done pulse");
    chk(tdone >= 32 && tdone <= 34, $sformatf("drain %0d", tdone));
    chk(cycles >= 32'(t0 - 2) && cycles <= 32'(t0 + 2), $sformatf("cycles %0d vs %0d", cycles, t0));
    @(negedge clk);
    chk(!done && !busy, "done is a pulse, idle after");
    chk(dut.table_q[0] == tbl[0], "write while busy ignored");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
