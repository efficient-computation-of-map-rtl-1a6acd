// mem_subsystem: the banked occupancy-grid and MI memories with both
// crossbars.
//
// The occupancy grid and the MI map are each split over N = 16 banks with
// the diagonal pattern bank = (x + y) mod 16, so any 16 consecutive cells of
// a row or a column lie in 16 different banks and all cores are served every
// cycle (source design, Fig. 2(b)). Every cell request is used three times:
//   cycle R      the ATU request reads the occupancy word (data in R+1),
//   cycle R+18   the same address reads the partial MI (data in R+19),
//   cycle R+19   the same address takes the updated MI from the core.
// The memory subsystem keeps the per-bank addresses and the per-core bank
// numbers in delay lines for this, so the cores never handle addresses. The
// MI banks bypass a same-cycle write to a read of the same word, which makes
// the read-modify-write exact even when the next slot reads the cell just
// updated. The delay lines, the re-use of the request and the bypass are
// this design's choices; the source design only shows the banks and the two
// crossbars.
//
// Host side (used while the accelerator is idle): occupancy writes by (x, y),
// MI reads by (x, y) with data one cycle later, and a clear port that writes
// zero to one word address in every MI bank.
module mem_subsystem
  import fcmi_pkg::*;
#(
  parameter int N     = N_CORES,
  parameter int DEPTH = MAX_DIM * PITCH
) (
  input  logic     clk,
  input  logic     rst_n,
  // from the ATUs (cycle R)
  input  mem_req_t req      [N],
  // to the cores
  output occ_t     occ_data [N],   // cycle R+1
  output fx_t      mi_rdata [N],   // cycle R+19
  input  fx_t      mi_wdata [N],   // cycle R+19
  // host and control
  input  logic     host_occ_we,
  input  coord_t   host_x,
  input  coord_t   host_y,
  input  occ_t     host_occ_wdata,
  input  logic     host_mi_re,
  output fx_t      host_mi_rdata,
  input  logic     clr_en,
  input  addr_t    clr_addr,
  output logic     wr_expect [N],  // per core: its bank takes an MI write now
  output logic     bypass_any      // some bank forwarded a same-cycle write
);
  localparam int RD_DLY = 18;
  localparam int WR_DLY = 19;

  // ---- crossbar 1: ATUs -> banks ----
  logic  b_en   [N];
  addr_t b_addr [N];
  bank_t b_src  [N];
  xbar_req #(.N(N)) u_xreq (.req(req), .en(b_en), .addr(b_addr), .src(b_src));

  // ---- delay lines ----
  logic  d_en   [WR_DLY+1][N];
  addr_t d_addr [WR_DLY+1][N];
  bank_t d_src  [WR_DLY+1][N];
  bank_t d_bank [WR_DLY+1][N];    // per core: which bank serves it
  always_comb begin
    for (int i = 0; i < N; i++) begin
      d_en[0][i]   = b_en[i];
      d_addr[0][i] = b_addr[i];
      d_src[0][i]  = b_src[i];
      d_bank[0][i] = req[i].bank;
    end
  end
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 1; k <= WR_DLY; k++)
        for (int i = 0; i < N; i++) d_en[k][i] <= 1'b0;
    end else begin
      for (int k = 1; k <= WR_DLY; k++)
        for (int i = 0; i < N; i++) d_en[k][i] <= d_en[k-1][i];
    end
  end
  always_ff @(posedge clk) begin
    for (int k = 1; k <= WR_DLY; k++)
      for (int i = 0; i < N; i++) begin
        d_addr[k][i] <= d_addr[k-1][i];
        d_src[k][i]  <= d_src[k-1][i];
        d_bank[k][i] <= d_bank[k-1][i];
      end
  end

  // ---- host address translation ----
  bank_t h_bank, h_bank_q;
  addr_t h_addr;
  always_comb begin
    h_bank = cell_bank(host_x, host_y);
    h_addr = cell_addr(host_x, host_y);
  end
  always_ff @(posedge clk) h_bank_q <= h_bank;

  // ---- crossbar 2, write direction: cores -> banks ----
  logic [FX_W-1:0] core_wd_w [N];
  logic [FX_W-1:0] bank_wd_w [N];
  fx_t bank_wdata [N];
  always_comb for (int i = 0; i < N; i++) core_wd_w[i] = mi_wdata[i];
  xbar_resp #(.N(N), .DW(FX_W)) u_xwr (.din(core_wd_w), .sel(d_src[WR_DLY]), .dout(bank_wd_w));
  always_comb for (int i = 0; i < N; i++) bank_wdata[i] = fx_t'(bank_wd_w[i]);

  // ---- banks ----
  occ_t occ_rd [N];
  fx_t  mi_rd  [N];
  logic [N-1:0] byp;
  for (genvar b = 0; b < N; b++) begin : g_bank
    logic  o_we, m_re, m_we;
    addr_t m_raddr, m_waddr;
    fx_t   m_wdata;
    always_comb begin
      o_we    = host_occ_we && (h_bank == bank_t'(b));
      m_re    = d_en[RD_DLY][b] || (host_mi_re && h_bank == bank_t'(b));
      m_raddr = d_en[RD_DLY][b] ? d_addr[RD_DLY][b] : h_addr;
      m_we    = d_en[WR_DLY][b] || clr_en;
      m_waddr = d_en[WR_DLY][b] ? d_addr[WR_DLY][b] : clr_addr;
      m_wdata = d_en[WR_DLY][b] ? bank_wdata[b] : '0;
    end
    occ_bank #(.DEPTH(DEPTH)) u_occ (
      .clk(clk), .re(b_en[b]), .raddr(b_addr[b]), .rdata(occ_rd[b]),
      .we(o_we), .waddr(h_addr), .wdata(host_occ_wdata));
    mi_bank #(.DEPTH(DEPTH)) u_mi (
      .clk(clk), .re(m_re), .raddr(m_raddr), .rdata(mi_rd[b]), .bypass(byp[b]),
      .we(m_we), .waddr(m_waddr), .wdata(m_wdata));
  end

  // ---- crossbar 2, read direction: banks -> cores ----
  logic [OCC_W-1:0] occ_rd_w [N];
  logic [OCC_W-1:0] occ_out_w [N];
  always_comb for (int i = 0; i < N; i++) occ_rd_w[i] = occ_rd[i];
  xbar_resp #(.N(N), .DW(OCC_W)) u_xocc (.din(occ_rd_w), .sel(d_bank[1]), .dout(occ_out_w));
  always_comb for (int i = 0; i < N; i++) occ_data[i] = occ_out_w[i];

  logic [FX_W-1:0] mi_rd_w [N];
  logic [FX_W-1:0] mi_out_w [N];
  always_comb for (int i = 0; i < N; i++) mi_rd_w[i] = mi_rd[i];
  xbar_resp #(.N(N), .DW(FX_W)) u_xmi (.din(mi_rd_w), .sel(d_bank[WR_DLY]), .dout(mi_out_w));
  always_comb for (int i = 0; i < N; i++) mi_rdata[i] = fx_t'(mi_out_w[i]);

  always_comb host_mi_rdata = mi_rd[h_bank_q];
  always_comb bypass_any = |byp;
  always_comb
    for (int i = 0; i < N; i++) wr_expect[i] = d_en[WR_DLY][d_bank[WR_DLY][i]];
endmodule
