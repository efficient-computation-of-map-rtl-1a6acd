// tb_ray_caster: hands a list of random ray groups (random directions,
// lengths 3..30, padded minor sizes 16..64) to the ray caster and checks
// every command it emits. Slot s of the 8 interleave slots is served in
// cycles t = s mod 8; a slot takes the next group when it has none, in the
// same turn. The minor offset of step k must be the closed form of
// Bresenham's rounding, ceil(k*dmin/dmaj - 1/2) = (2k*dmin + dmaj - 1) /
// (2*dmaj), taken modulo the padded size, with moved set when it changes.
// At the end all groups must have been handed out and idle must be high.
module tb_ray_caster;
  import fcmi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic run = 0, alloc_req, alloc_valid, idle;
  angle_cfg_t alloc_cfg; coord_t alloc_base, alloc_nmaj, alloc_pmin;
  ray_cmd_t cmd;
  ray_caster dut (.clk(clk), .rst_n(rst_n), .run(run), .alloc_req(alloc_req),
    .alloc_valid(alloc_valid), .alloc_cfg(alloc_cfg), .alloc_base(alloc_base),
    .alloc_nmaj(alloc_nmaj), .alloc_pmin(alloc_pmin), .cmd(cmd), .idle(idle));
  int checks = 0, failures = 0;
  typedef struct { angle_cfg_t cfg; int base, nmaj, pmin; } grp_t;
  grp_t groups [$];
  grp_t cur [N_SLOTS];
  bit   act [N_SLOTS];
  int   stp [N_SLOTS];
  int   gi = 0, ng = 40;
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always_comb begin
    alloc_valid = (gi < groups.size());
    if (gi < groups.size()) begin
      alloc_cfg = groups[gi].cfg; alloc_base = coord_t'(groups[gi].base);
      alloc_nmaj = coord_t'(groups[gi].nmaj); alloc_pmin = coord_t'(groups[gi].pmin);
    end else begin
      alloc_cfg = '0; alloc_base = '0; alloc_nmaj = '0; alloc_pmin = '0;
    end
  end
  initial begin
    int t;
    for (int i = 0; i < ng; i++) begin
      grp_t g;
      g.cfg.axis_y = $urandom; g.cfg.maj_neg = $urandom; g.cfg.min_neg = $urandom;
      g.cfg.dmaj = coord_t'($urandom_range(1, 300));
      g.cfg.dmin = coord_t'($urandom_range(0, g.cfg.dmaj));
      g.cfg.width = fx_t'($urandom);
      g.nmaj = $urandom_range(3, 30);
      g.pmin = 16 * $urandom_range(1, 4);
      g.base = 16 * $urandom_range(0, g.pmin / 16 - 1);
      groups.push_back(g);
    end
    foreach (act[s]) act[s] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk); run = 1;
    t = 0;
    while (t < 2000) begin
      int s, k, mo, mp;
      bit v;
      s = t % N_SLOTS;
      // model: the slot takes a new group if it has none
      if (!act[s] && gi < groups.size()) begin
        @(posedge clk);        // the DUT samples alloc in this edge
        #1;
        cur[s] = groups[gi]; act[s] = 1; stp[s] = 0; gi++;
      end else begin
        @(posedge clk);
        #1;
      end
      v = act[s];
      checks++;
      if (cmd.valid !== v) begin
        failures++; if (failures < 10) $display("t=%0d slot %0d valid %0d want %0d", t, s, cmd.valid, v);
      end else if (v) begin
        k  = stp[s];
        mo = (2 * k * cur[s].cfg.dmin + cur[s].cfg.dmaj - 1) / (2 * cur[s].cfg.dmaj);
        mp = (k == 0) ? mo : (2 * (k - 1) * cur[s].cfg.dmin + cur[s].cfg.dmaj - 1) / (2 * cur[s].cfg.dmaj);
        if (cmd.step !== coord_t'(k) || cmd.min_off !== coord_t'(mo % cur[s].pmin) ||
            cmd.moved !== (mo != mp) || cmd.first !== (k == 0) || cmd.base !== coord_t'(cur[s].base) ||
            cmd.axis_y !== cur[s].cfg.axis_y || cmd.maj_neg !== cur[s].cfg.maj_neg ||
            cmd.min_neg !== cur[s].cfg.min_neg || cmd.width !== cur[s].cfg.width) begin
          failures++;
          if (failures < 10) $display("t=%0d slot %0d step %0d: got step %0d off %0d moved %0d, want off %0d moved %0d base %0d/%0d w %0d/%0d ax %0d%0d%0d/%0d%0d%0d f%0d", t, s, k, cmd.step, cmd.min_off, cmd.moved, mo % cur[s].pmin, mo != mp, cmd.base, cur[s].base, cmd.width, cur[s].cfg.width, cmd.axis_y, cmd.maj_neg, cmd.min_neg, cur[s].cfg.axis_y, cur[s].cfg.maj_neg, cur[s].cfg.min_neg, cmd.first);
        end
        stp[s]++;
        if (stp[s] == cur[s].nmaj) act[s] = 0;
      end
      @(negedge clk);
      t++;
      if (gi == groups.size() && act.sum() with (int'(item)) == 0) break;
    end
    @(posedge clk); #1;
    checks++;
    if (!idle || gi != ng) begin failures++; $display("not idle at end or groups left"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
