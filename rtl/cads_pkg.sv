// cads_pkg: types and constants shared by the CADS scheduler.
//
// The sizes follow the configuration the scheduler is dimensioned for:
// 16 cores, a 64-entry request buffer, 32 DRAM banks, four features and four
// theta parameters per core model, 16-bit fixed-point arithmetic. All
// fractional values (theta, rewards, alpha, gamma, MRStarvation) use a
// signed Q8.8 format chosen for this implementation; the original work only
// states that the arithmetic is 16-bit fixed point. Epsilon is an unsigned
// 16-bit probability (value / 65536) compared with a random number.
package cads_pkg;

  localparam int unsigned NCORES_D = 16;   // K
  localparam int unsigned NBUF_D   = 64;   // n, request buffer size
  localparam int unsigned NBANKS_D = 32;   // B
  localparam int unsigned NFEAT    = 4;    // f = theta = 4
  localparam int unsigned W        = 16;   // fixed-point word
  localparam int unsigned FRAC     = 8;    // Q8.8
  localparam int unsigned ROW_W    = 16;   // row address bits
  localparam int unsigned HIST_LEN_D = 100; // HistPet window

  // feature indices, order of equation (1)
  localparam int unsigned F_NUMPET = 0;
  localparam int unsigned F_ROWHIT = 1;
  localparam int unsigned F_BPPET  = 2;
  localparam int unsigned F_HIST   = 3;

  typedef logic signed [W-1:0] fix_t;      // Q8.8 signed
  typedef logic [W-1:0]        feat_t;     // unsigned integer feature count

  localparam fix_t FIX_MAX = 16'sh7FFF;
  localparam fix_t FIX_MIN = -16'sh8000;

  // One memory petition. Widths of core and bank fields are sized for the
  // largest configuration (up to 256 cores / banks); modules use the low bits.
  typedef struct packed {
    logic [7:0]       core;
    logic [7:0]       bank;
    logic [ROW_W-1:0] row;
    logic             wr;
  } req_t;

  // Configuration registers (reset values: alpha 0.15, gamma 0.9, eps 0.1).
  localparam fix_t        ALPHA_D   = 16'sd38;    // 0.1484
  localparam fix_t        GAMMA_D   = 16'sd230;   // 0.8984
  localparam logic [15:0] EPSILON_D = 16'd6554;   // 0.1000
  typedef struct packed {
    fix_t                  alpha;
    fix_t                  gamma;
    logic [15:0]           epsilon;
    logic [3:0][15:0]      thr;      // K0..K3, MRStarvation thresholds (Q8.8 unsigned)
    logic [15:0][W-1:0]    rule_reward; // indexed {max_level, min_level}
  } cfg_t;

  // Saturate a wide signed value to Q8.8.
  function automatic fix_t sat16(input logic signed [47:0] v);
    if (v > 48'sd32767)       return FIX_MAX;
    else if (v < -48'sd32768) return FIX_MIN;
    else                      return fix_t'(v[15:0]);
  endfunction

  // Q8.8 times Q8.8 -> Q8.8, truncating toward minus infinity, saturating.
  function automatic fix_t fmul(input fix_t a, input fix_t b);
    logic signed [31:0] p;
    p = 32'(a) * 32'(b);
    return sat16(48'(p >>> FRAC));
  endfunction

  // Q8.8 theta times an unsigned integer feature -> Q8.8, saturating.
  function automatic fix_t fmul_feat(input fix_t t, input feat_t f);
    logic signed [33:0] p;
    p = 34'(t) * $signed({18'd0, f});
    return sat16(48'(p));
  endfunction

  // Q8.8 saturating add.
  function automatic fix_t fadd(input fix_t a, input fix_t b);
    return sat16(48'(a) + 48'(b));
  endfunction

endpackage
