// control_fsm: sequencing of one MI map computation.
//
// Holds the host configuration: map width and height, the table of ray
// angles (Bresenham direction and cell width of each) and the angular step.
// On start it
//   CLEAR: writes zero to every MI word of the map, 16 banks in parallel,
//   RUN:   hands ray groups to the ray caster in order (angle 0 group 0,
//          angle 0 group 1, ...), one group being 16 parallel rays starting
//          at 16 consecutive edge cells; an angle has (padded minor size)/16
//          groups, so every cell of the map is visited exactly once per angle,
//   DRAIN: waits for the last cells to leave the core pipelines,
// then pulses done and records the cycle count from start to done.
// Its place in the design (driving the ray caster, the ATUs and the cores'
// cell width and ray reset) follows the source design; the states, the
// clear phase and the group order are this design's choices.
//
// Timing: cfg writes and start are accepted while idle; done is a one-cycle
// pulse.
module control_fsm
  import fcmi_pkg::*;
#(
  parameter int MAX_RAYS  = 64,
  parameter int DRAIN_CYC = 32
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  coord_t     map_w,
  input  coord_t     map_h,
  input  logic [$clog2(MAX_RAYS):0] n_rays,
  input  logic       cfg_we,
  input  logic [$clog2(MAX_RAYS)-1:0] cfg_idx,
  input  angle_cfg_t cfg_data,
  // to the ATUs
  output coord_t     pad_w,
  output coord_t     pad_h,
  // to the ray caster
  output logic       run,
  input  logic       alloc_req,
  output logic       alloc_valid,
  output angle_cfg_t alloc_cfg,
  output coord_t     alloc_base,
  output coord_t     alloc_nmaj,
  output coord_t     alloc_pmin,
  input  logic       rc_idle,
  // to the MI banks
  output logic       clr_en,
  output addr_t      clr_addr,
  // status
  output logic       busy,
  output logic       done,
  output logic [31:0] cycles
);
  typedef enum logic [1:0] {S_IDLE, S_CLEAR, S_RUN, S_DRAIN} state_t;
  localparam int RI_W = $clog2(MAX_RAYS);

  state_t state;
  angle_cfg_t table_q [MAX_RAYS];
  logic [RI_W:0] angle;
  coord_t group, groups, clr_y, clr_j;
  logic [$clog2(DRAIN_CYC+1)-1:0] drain;
  logic [31:0] cnt;

  always_comb begin
    pad_w = (map_w + coord_t'(N_CORES-1)) & ~coord_t'(N_CORES-1);
    pad_h = (map_h + coord_t'(N_CORES-1)) & ~coord_t'(N_CORES-1);
  end

  always_comb begin
    alloc_valid = (state == S_RUN) && (angle < n_rays);
    alloc_cfg   = table_q[angle[RI_W-1:0]];
    alloc_base  = group << BANK_W;
    alloc_nmaj  = alloc_cfg.axis_y ? map_h : map_w;
    alloc_pmin  = alloc_cfg.axis_y ? pad_w : pad_h;
    groups      = alloc_pmin >> BANK_W;
    run         = (state == S_RUN);
    clr_en      = (state == S_CLEAR);
    clr_addr    = cell_addr(clr_j << BANK_W, clr_y);
    busy        = (state != S_IDLE);
  end

  always_ff @(posedge clk) begin
    if (cfg_we && state == S_IDLE) table_q[cfg_idx] <= cfg_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      angle  <= '0;
      group  <= '0;
      clr_y  <= '0;
      clr_j  <= '0;
      drain  <= '0;
      cnt    <= '0;
      cycles <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      if (state != S_IDLE) cnt <= cnt + 1;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_CLEAR;
          angle <= '0;
          group <= '0;
          clr_y <= '0;
          clr_j <= '0;
          cnt   <= 32'd1;
        end
        S_CLEAR: begin
          if (clr_j + coord_t'(1) == (pad_w >> BANK_W)) begin
            clr_j <= '0;
            if (clr_y + coord_t'(1) == map_h) state <= S_RUN;
            else clr_y <= clr_y + coord_t'(1);
          end else begin
            clr_j <= clr_j + coord_t'(1);
          end
        end
        S_RUN: begin
          if (alloc_req && alloc_valid) begin
            if (group + coord_t'(1) == groups) begin
              group <= '0;
              angle <= angle + 1'b1;
            end else begin
              group <= group + coord_t'(1);
            end
          end
          if (!alloc_valid && rc_idle) begin
            state <= S_DRAIN;
            drain <= '0;
          end
        end
        S_DRAIN: begin
          drain <= drain + 1'b1;
          if (int'(drain) == DRAIN_CYC - 1) begin
            state  <= S_IDLE;
            done   <= 1'b1;
            cycles <= cnt;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
