// tb_atu: random ray-caster commands for several map sizes; the request
// (valid, bank, word address) and the ray-reset flag must match a model
// that computes the cell with modular arithmetic: minor = (origin +/- offset)
// mod padded size, bubble in the padding, reset at the first step, after a
// wrap and on entry from the padding; bank = (x+y) mod 16, word =
// y*32 + x/16. Uses core index 5.
module tb_atu;
  import fcmi_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ray_cmd_t cmd = '0;
  coord_t mw, mh, pw, ph;
  mem_req_t req; logic ray_reset; fx_t width;
  atu #(.CORE_ID(5)) dut (.clk(clk), .rst_n(rst_n), .cmd(cmd), .map_w(mw), .map_h(mh),
    .pad_w(pw), .pad_h(ph), .req(req), .ray_reset(ray_reset), .width(width));
  int checks = 0, failures = 0, n_wrap = 0, n_bub = 0;
  initial begin
    #500000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      int w, h, nmin, pmin, nmaj, org, m, prev, maj, x, y;
      bit v, rs, wr;
      w = (t % 3 == 0) ? 201 : $urandom_range(16, 100);
      h = (t % 5 == 0) ? 201 : $urandom_range(16, 100);
      @(negedge clk);
      mw = coord_t'(w); mh = coord_t'(h);
      pw = coord_t'((w + 15) / 16 * 16); ph = coord_t'((h + 15) / 16 * 16);
      cmd.valid   = ($urandom_range(0, 7) != 0);
      cmd.axis_y  = $urandom; cmd.maj_neg = $urandom; cmd.min_neg = $urandom;
      cmd.width   = fx_t'($urandom);
      nmin = cmd.axis_y ? w : h; pmin = cmd.axis_y ? pw : ph; nmaj = cmd.axis_y ? h : w;
      cmd.base    = coord_t'($urandom_range(0, pmin / 16 - 1) * 16);
      cmd.step    = coord_t'($urandom_range(0, nmaj - 1));
      cmd.min_off = coord_t'($urandom_range(0, pmin - 1));
      cmd.moved   = $urandom; cmd.first = (cmd.step == 0);
      org  = cmd.base + 5;
      m    = cmd.min_neg ? org - cmd.min_off : org + cmd.min_off;
      m    = ((m % pmin) + pmin) % pmin;
      prev = cmd.moved ? (cmd.min_neg ? m + 1 : m - 1) : m;
      wr   = (prev < 0 || prev >= pmin);
      prev = ((prev % pmin) + pmin) % pmin;
      maj  = cmd.maj_neg ? nmaj - 1 - cmd.step : cmd.step;
      x = cmd.axis_y ? m : maj; y = cmd.axis_y ? maj : m;
      v  = cmd.valid && (m < nmin);
      rs = v && (cmd.first || wr || prev >= nmin);
      if (v && wr) n_wrap++;
      if (cmd.valid && !v) n_bub++;
      @(posedge clk); #1;
      checks++;
      if (req.valid !== v || ray_reset !== rs || width !== cmd.width ||
          (v && (req.bank !== bank_t'((x + y) % 16) || req.addr !== addr_t'(y * 32 + x / 16)))) begin
        failures++;
        if (failures < 10) $display("t=%0d got v%0d r%0d b%0d a%0d want v%0d r%0d b%0d a%0d", t,
          req.valid, ray_reset, req.bank, req.addr, v, rs, (x + y) % 16, y * 32 + x / 16);
      end
    end
    checks++; if (n_wrap == 0 || n_bub == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
