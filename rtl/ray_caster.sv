// ray_caster: Bresenham ray stepping shared by all cores, time-multiplexed
// over the N_SLOTS = 8 interleaved rays of each core.
//
// All 16 cores trace 16 parallel rays of the same angle whose origins are 16
// consecutive cells along one edge of the map (a "ray group"), so one
// Bresenham walk gives the coordinate offset for all of them. Each of the 8
// interleave slots owns one ray group and keeps its own walk context (step,
// minor offset, error term); in cycle t the context of slot t mod 8 is
// used, emitted and advanced, so each ray moves one cell every 8 cycles.
// When a slot's walk ends it asks the control FSM for the next group and
// starts it in the same turn, so no slot idles while groups remain.
//
// A walk has one step per cell of the major axis (the map height for steep
// rays, the width for shallow ones). The minor offset is kept modulo the
// padded minor size, which is what makes rays leaving one side of the map
// continue on the opposite side (the "wrapping" of the source design). The
// per-slot contexts, the group hand-out and the modulo offset are this
// design's choices; the source design names a Bresenham ray caster.
//
// Bresenham (0 <= dmin <= dmaj): err starts at 2 dmin - dmaj; after each
// cell, if err > 0 the minor offset advances and err -= 2 dmaj; err += 2 dmin.
//
// Timing: cmd is registered, one ray_cmd_t per cycle while run is high.
module ray_caster
  import fcmi_pkg::*;
#(
  parameter int SLOTS = N_SLOTS
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       run,
  // group hand-out from the control FSM
  output logic       alloc_req,
  input  logic       alloc_valid,
  input  angle_cfg_t alloc_cfg,
  input  coord_t     alloc_base,
  input  coord_t     alloc_nmaj,   // ray length in cells
  input  coord_t     alloc_pmin,   // padded minor size (multiple of 16)
  output ray_cmd_t   cmd,
  output logic       idle          // no slot holds a ray group
);
  localparam int SW = (SLOTS > 1) ? $clog2(SLOTS) : 1;
  typedef logic signed [COORD_W+2:0] err_t;

  typedef struct packed {
    logic       active;
    angle_cfg_t cfg;
    coord_t     base;
    coord_t     nmaj;
    coord_t     pmin;
    coord_t     step;
    coord_t     min_off;
    err_t       err;
    logic       moved;
  } ctx_t;

  ctx_t ctx [SLOTS];
  logic [SW-1:0] slot;
  ctx_t cur, nxt;
  logic cur_ok;

  always_comb begin
    cur       = ctx[slot];
    alloc_req = run && !cur.active;
    cur_ok    = cur.active;
    if (!cur.active && run && alloc_valid) begin
      cur.active  = 1'b1;
      cur.cfg     = alloc_cfg;
      cur.base    = alloc_base;
      cur.nmaj    = alloc_nmaj;
      cur.pmin    = alloc_pmin;
      cur.step    = '0;
      cur.min_off = '0;
      cur.err     = (err_t'(alloc_cfg.dmin) <<< 1) - err_t'(alloc_cfg.dmaj);
      cur.moved   = 1'b0;
      cur_ok      = 1'b1;
    end
    // advance the walk by one cell
    nxt = cur;
    if (cur_ok) begin
      if (cur.step + coord_t'(1) == cur.nmaj) begin
        nxt.active = 1'b0;
      end else begin
        nxt.step = cur.step + coord_t'(1);
        if (cur.err > 0) begin
          nxt.min_off = (cur.min_off + coord_t'(1) == cur.pmin) ? '0 : cur.min_off + coord_t'(1);
          nxt.err     = cur.err - (err_t'(cur.cfg.dmaj) <<< 1) + (err_t'(cur.cfg.dmin) <<< 1);
          nxt.moved   = 1'b1;
        end else begin
          nxt.err     = cur.err + (err_t'(cur.cfg.dmin) <<< 1);
          nxt.moved   = 1'b0;
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      slot <= '0;
      for (int s = 0; s < SLOTS; s++) ctx[s] <= '0;
      cmd  <= '0;
    end else if (run) begin
      slot      <= (int'(slot) == SLOTS-1) ? '0 : slot + 1'b1;
      ctx[slot] <= nxt;
      cmd.valid   <= cur_ok;
      cmd.axis_y  <= cur.cfg.axis_y;
      cmd.maj_neg <= cur.cfg.maj_neg;
      cmd.min_neg <= cur.cfg.min_neg;
      cmd.width   <= cur.cfg.width;
      cmd.base    <= cur.base;
      cmd.step    <= cur.step;
      cmd.min_off <= cur.min_off;
      cmd.moved   <= cur.moved;
      cmd.first   <= (cur.step == '0);
    end else begin
      slot      <= '0;
      cmd.valid <= 1'b0;
      for (int s = 0; s < SLOTS; s++) ctx[s].active <= 1'b0;
    end
  end

  always_comb begin
    idle = 1'b1;
    for (int s = 0; s < SLOTS; s++) if (ctx[s].active) idle = 1'b0;
  end
endmodule
