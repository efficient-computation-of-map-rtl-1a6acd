// tb_mem_subsystem: loads a 64 x 40 occupancy grid through the host port,
// clears the MI map, then issues groups of 16 requests for 16 consecutive
// cells of a random row or column (with wrap-around at 64 or 48 and random
// invalid lanes), as the ATUs do. Checks: each core gets its ci's
// occupancy one cycle after the request; 19 cycles after the request it gets
// the ci's current MI, and the value it returns that cycle is stored. MI
// is updated as mi + 1 + core index, so the final MI map, read through the
// host port, must equal a model that counts the visits; back-to-back visits
// to the same ci exercise the same-cycle bypass.
module tb_mem_subsystem;
  import fcmi_pkg::*;
  localparam int W = 64, H = 40, PH = 48;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  mem_req_t req [N_CORES];
  occ_t occ_data [N_CORES];
  fx_t mi_rdata [N_CORES], mi_wdata [N_CORES];
  logic host_occ_we = 0, host_mi_re = 0, clr_en = 0, bypass_any;
  logic wr_expect [N_CORES];
  coord_t host_x = 0, host_y = 0; occ_t host_occ_wdata = 0; fx_t host_mi_rdata; addr_t clr_addr = 0;
  mem_subsystem dut (.clk(clk), .rst_n(rst_n), .req(req), .occ_data(occ_data),
    .mi_rdata(mi_rdata), .mi_wdata(mi_wdata), .host_occ_we(host_occ_we), .host_x(host_x),
    .host_y(host_y), .host_occ_wdata(host_occ_wdata), .host_mi_re(host_mi_re),
    .host_mi_rdata(host_mi_rdata), .clr_en(clr_en), .clr_addr(clr_addr),
    .wr_expect(wr_expect), .bypass_any(bypass_any));
  int checks = 0, failures = 0, n_byp = 0;
  int occ [W*H];
  int model [W*H];
  // per cycle: which ci each core asked for (-1 = none)
  int issued [$][N_CORES];
  longint cyc = 0;
  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // response side: check occupancy at +1 and MI at +19, write back mi + 1 + c
  always @(negedge clk) if (rst_n && issued.size() > 0) begin
    if (bypass_any) n_byp++;
    if (issued.size() >= 2) begin
      for (int c = 0; c < N_CORES; c++) begin
        int ci;
        ci = issued[issued.size() - 2][c];
        if (ci >= 0) begin
          checks++;
          if (occ_data[c] !== occ_t'(occ[ci])) begin
            failures++; if (failures < 10) $display("occ core %0d ci %0d got %0d", c, ci, occ_data[c]);
          end
        end
      end
    end
    for (int c = 0; c < N_CORES; c++) mi_wdata[c] = '0;
    if (issued.size() >= 20) begin
      for (int c = 0; c < N_CORES; c++) begin
        int ci;
        ci = issued[issued.size() - 20][c];
        if (ci >= 0) begin
          checks++;
          if (mi_rdata[c] !== fx_t'(model[ci]) || !wr_expect[c]) begin
            failures++; if (failures < 10) $display("mi core %0d ci %0d got %0d want %0d", c, ci, mi_rdata[c], model[ci]);
          end
          model[ci] += 1 + c;
          mi_wdata[c] = mi_rdata[c] + fx_t'(1 + c);
        end
      end
    end
  end

  initial begin
    foreach (req[c]) req[c] = '0;
    foreach (mi_wdata[c]) mi_wdata[c] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk);
        host_occ_we = 1; host_x = coord_t'(x); host_y = coord_t'(y);
        occ[y*W + x] = $urandom_range(0, 100); host_occ_wdata = occ_t'(occ[y*W + x]);
      end
    @(negedge clk); host_occ_we = 0; clr_en = 1;
    for (int y = 0; y < H; y++)
      for (int j = 0; j < W / 16; j++) begin
        clr_addr = addr_t'(y * 32 + j);
        @(negedge clk);
      end
    clr_en = 0;
    foreach (model[i]) model[i] = 0;
    for (int t = 0; t < 600; t++) begin
      int cells [N_CORES];
      bit col; int base, line;
      @(posedge clk); #1;
      col  = (t % 16) >= 8;               // alternate row and column bursts
      line = col ? $urandom_range(0, W - 1) : $urandom_range(0, H - 1);
      base = (t % 4 == 0) ? 0 : $urandom_range(0, 63);
      for (int c = 0; c < N_CORES; c++) begin
        int m, x, y;
        m = col ? (base + c) % PH : (base + c) % W;
        x = col ? line : m; y = col ? m : line;
        req[c].valid = (m < (col ? H : W)) && ($urandom_range(0, 9) != 0);
        req[c].bank  = cell_bank(coord_t'(x), coord_t'(y));
        req[c].addr  = cell_addr(coord_t'(x), coord_t'(y));
        cells[c] = req[c].valid ? y*W + x : -1;
      end
      issued.push_back(cells);
    end
    @(posedge clk); #1;
    foreach (req[c]) req[c].valid = 0;
    for (int k = 0; k < 24; k++) begin
      int none [N_CORES];
      foreach (none[c]) none[c] = -1;
      issued.push_back(none);
      @(posedge clk); #1;
    end
    // host readback of the MI map
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        @(negedge clk); host_mi_re = 1; host_x = coord_t'(x); host_y = coord_t'(y);
        @(posedge clk); #1;
        checks++;
        if (host_mi_rdata !== fx_t'(model[y*W + x])) begin
          failures++; if (failures < 10) $display("readback (%0d,%0d) got %0d want %0d", x, y, host_mi_rdata, model[y*W + x]);
        end
      end
    checks++; if (n_byp == 0) begin failures++; $display("no bypass"); end
    $display("bypass cycles %0d", n_byp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
