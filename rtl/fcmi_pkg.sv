// fcmi_pkg: types, constants and arithmetic helpers shared by the FCMI
// mutual-information accelerator.
//
// All MI arithmetic is signed 32-bit fixed point with 20 integer and 12
// fractional bits (Q20.12), as the source design states. Occupancy is an
// 8-bit code 0..100 meaning probability code/100 (101 levels). The map is
// split over 16 banks with the diagonal pattern bank = (x + y) mod 16; the
// in-bank address is y * (MAX_DIM/16) + x/16. The exponential e^{-x} on
// [0,8] is a 16-piece linear fit; each piece is the least-squares line of
// e^{-x} over its half-unit interval, rounded to Q20.12. The bank address
// formula, the 8-bit occupancy code and the coefficient rounding are this
// design's choices.
package fcmi_pkg;

  localparam int N_CORES  = 16;          // cores and banks
  localparam int N_SLOTS  = 8;           // rays interleaved per core
  localparam int MAX_DIM  = 512;         // largest map side
  localparam int COORD_W  = 10;          // map coordinates and offsets
  localparam int BANK_W   = 4;
  localparam int PITCH    = MAX_DIM / N_CORES;          // words per map row in a bank
  localparam int ADDR_W   = $clog2(MAX_DIM * PITCH);    // 14
  localparam int OCC_W    = 8;
  localparam int OCC_LEVELS = 101;
  localparam int FX_W     = 32;
  localparam int FX_FRAC  = 12;
  localparam int PRE_STAGES = 8;         // pipeline stages 3..10
  localparam int FB_STAGES  = 8;         // pipeline stages 11..18

  typedef logic signed [FX_W-1:0] fx_t;
  typedef logic [COORD_W-1:0]     coord_t;
  typedef logic [BANK_W-1:0]      bank_t;
  typedef logic [ADDR_W-1:0]      addr_t;
  typedef logic [OCC_W-1:0]       occ_t;

  localparam fx_t FX_ONE = 32'sd4096;
  localparam fx_t FX_TWO = 32'sd8192;
  localparam fx_t EXP_XMAX = 32'sd32768;           // 8.0
  // log(Lambda) - 1 with Lambda = 1e7: h(Z) - h(Z|M) = (alpha1 + K*beta1) dtheta
  localparam fx_t K_LOGL_M1 = 32'sd61924;

  // Piecewise-linear e^{-x}: piece k covers [k/2, (k+1)/2), e = slope*x + icpt.
  localparam fx_t EXP_SLOPE [16] = '{-32'sd3210, -32'sd1947, -32'sd1181, -32'sd716,
                                     -32'sd434,  -32'sd263,  -32'sd160,  -32'sd97,
                                     -32'sd59,   -32'sd36,   -32'sd22,   -32'sd13,
                                     -32'sd8,    -32'sd5,    -32'sd3,    -32'sd2};
  localparam fx_t EXP_ICPT  [16] = '{32'sd4026, 32'sd3415, 32'sd2662, 32'sd1973,
                                     32'sd1414, 32'sd989,  32'sd680,  32'sd461,
                                     32'sd309,  32'sd205,  32'sd135,  32'sd89,
                                     32'sd58,   32'sd37,   32'sd24,   32'sd16};

  // Per-occupancy constants held in the core LUT.
  typedef struct packed {
    fx_t lam;     // lambda_m = min(-log(1-o), Lambda); 8.0 stands in for o = 1
    fx_t nlog;    // -log(lambda_m); 0 for o = 0, -log(1e7) for o = 1
    fx_t inv;     // 1/lambda_m; 0 for o = 0 and o = 1
  } lut_entry_t;

  // One ray angle: Bresenham direction and the cell width crossed per step.
  typedef struct packed {
    logic   axis_y;    // 1: major axis is y (steep ray)
    logic   maj_neg;   // major coordinate decreases along the ray
    logic   min_neg;   // minor coordinate decreases along the ray
    coord_t dmaj;      // Bresenham deltas, dmin <= dmaj, dmaj > 0
    coord_t dmin;
    fx_t    width;     // cell width w (cells per major step, Q20.12)
  } angle_cfg_t;

  // One issue of the ray caster: one cell position for all 16 cores.
  typedef struct packed {
    logic   valid;
    logic   axis_y;
    logic   maj_neg;
    logic   min_neg;
    fx_t    width;
    coord_t base;      // minor origin of core 0 (group * 16)
    coord_t step;      // major offset
    coord_t min_off;   // minor offset, reduced modulo the padded minor size
    logic   moved;     // minor offset changed on this step
    logic   first;     // first cell of the ray group
  } ray_cmd_t;

  // A memory request from one ATU.
  typedef struct packed {
    logic  valid;
    bank_t bank;
    addr_t addr;
  } mem_req_t;

  typedef struct packed { fx_t a1; fx_t b1; fx_t a0; fx_t b0; } fb_state_t;

  // Preprocess results used by the feedback section.
  typedef struct packed {
    fx_t e;    // e^{-lambda w}
    fx_t l;    // lambda w
    fx_t w;    // cell width
    fx_t ta;   // (1/lambda)(gamma3 - gamma2 log lambda)
    fx_t tb;   // (1/lambda) gamma2
    fx_t tc;   // gamma2 - gamma1 log lambda
    fx_t td;   // gamma1
  } pre_t;

  localparam fb_state_t FB_RESET = '0;   // expectations at the start of a ray

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = a * b;
    return p[FX_FRAC +: FX_W];
  endfunction

  function automatic bank_t cell_bank(coord_t x, coord_t y);
    logic [COORD_W:0] s;
    s = {1'b0, x} + {1'b0, y};
    return s[BANK_W-1:0];
  endfunction

  function automatic addr_t cell_addr(coord_t x, coord_t y);
    logic [ADDR_W-1:0] row;
    row = ADDR_W'(y) * ADDR_W'(PITCH);
    return row + ADDR_W'(x >> BANK_W);
  endfunction

endpackage
