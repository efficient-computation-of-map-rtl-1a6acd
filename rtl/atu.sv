// atu: address translation unit of one core.
//
// Turns the shared ray-caster command into this core's map cell and its
// memory location. The core's ray starts at minor coordinate
// base + CORE_ID on the map edge where the major coordinate is 0 (or the
// last row/column for rays running the other way). The cell is
//   major = step            (or nmaj-1-step),
//   minor = (origin +/- min_off) mod padded minor size,
// so a ray that leaves one side re-enters on the other (wrapping). The
// padded size is the map size rounded up to a multiple of 16, which keeps
// the 16 cells of one issue in 16 distinct banks also across the wrap; a
// cell in the padding is a bubble (valid = 0). A new ray starts, and the
// core must reset its expectations, at the first step, after a wrap, and
// when the ray enters the map from the padding. Finally the cell (x, y)
// maps to bank (x + y) mod 16 and word y*PITCH + x/16.
// The ATU name and its place between the FSM/ray caster and the first
// crossbar follow the source design; padding, the reset rule and the address
// formula are this design's.
//
// Timing: one registered request per cycle.
module atu
  import fcmi_pkg::*;
#(
  parameter int CORE_ID = 0
) (
  input  logic     clk,
  input  logic     rst_n,
  input  ray_cmd_t cmd,
  input  coord_t   map_w,
  input  coord_t   map_h,
  input  coord_t   pad_w,
  input  coord_t   pad_h,
  output mem_req_t req,
  output logic     ray_reset,
  output fx_t      width
);
  typedef logic signed [COORD_W+1:0] sc_t;
  coord_t nmin, pmin, nmaj, maj, mnr, prev, x, y;
  sc_t    org, m;
  logic   valid, wrapped, prev_out;

  always_comb begin
    nmin = cmd.axis_y ? map_w : map_h;
    pmin = cmd.axis_y ? pad_w : pad_h;
    nmaj = cmd.axis_y ? map_h : map_w;
    maj  = cmd.maj_neg ? (nmaj - coord_t'(1) - cmd.step) : cmd.step;
    org  = sc_t'(cmd.base) + sc_t'(CORE_ID);
    if (cmd.min_neg) begin
      m = org - sc_t'(cmd.min_off);
      if (m < 0) m = m + sc_t'(pmin);
    end else begin
      m = org + sc_t'(cmd.min_off);
      if (m >= sc_t'(pmin)) m = m - sc_t'(pmin);
    end
    mnr     = coord_t'(m);
    valid   = cmd.valid && (mnr < nmin);
    wrapped = cmd.moved && (cmd.min_neg ? (mnr == pmin - coord_t'(1)) : (mnr == '0));
    if (!cmd.moved)       prev = mnr;
    else if (cmd.min_neg) prev = (mnr == pmin - coord_t'(1)) ? '0 : mnr + coord_t'(1);
    else                  prev = (mnr == '0) ? pmin - coord_t'(1) : mnr - coord_t'(1);
    prev_out = (prev >= nmin);
    x = cmd.axis_y ? mnr : maj;
    y = cmd.axis_y ? maj : mnr;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      req       <= '0;
      ray_reset <= 1'b0;
    end else begin
      req.valid <= valid;
      req.bank  <= cell_bank(x, y);
      req.addr  <= cell_addr(x, y);
      ray_reset <= valid && (cmd.first || wrapped || prev_out);
    end
  end
  always_ff @(posedge clk) width <= cmd.width;
endmodule
