// vorion_pkg: types, constants and FP32 arithmetic shared by the Gaussian
// rasterizer, its lanes, the pixel unit and the raster agent.
//
// All datapath values are IEEE-754 single precision (the design runs in FP32
// throughout). The arithmetic functions here are combinational and
// synthesizable, but simplified: results are truncated (round toward zero),
// subnormal inputs and outputs are flushed to zero and NaN is not produced
// (overflow saturates to infinity). exp is built as 2^(x*log2 e), with the
// integer part going into the exponent and 2^frac taken from a 5th-order
// fixed-point polynomial (relative error below 1e-6 before truncation).
// These rounding and special-value rules are choices of this design.
//
// The Gaussian record (gauss_t) holds what the paper lists for the Gaussian
// buffer: 2D mean, inverse 2D covariance (conic), opacity and RGB colour, plus
// the screen-space AABB used for the tile intersection and a tag whose MSB is
// the "intersect" bit (Gaussian spans several tiles).
package vorion_pkg;

  typedef logic [31:0] f32_t;

  localparam f32_t F_ZERO      = 32'h0000_0000;
  localparam f32_t F_ONE       = 32'h3F80_0000;
  localparam f32_t F_HALF      = 32'h3F00_0000;
  localparam f32_t F_TWO       = 32'h4000_0000;
  localparam f32_t F_ALPHA_MAX = 32'h3F7D_70A4;  // 0.99
  localparam f32_t F_ALPHA_MIN = 32'h3B80_8081;  // 1/255
  localparam f32_t F_T_MIN     = 32'h38D1_B717;  // 1e-4
  localparam f32_t F_LOG2E     = 32'h3FB8_AA3B;  // log2(e)

  // Tile geometry (64x64 rendering tile, 64x32 training tile).
  localparam int unsigned TILE_W      = 64;
  localparam int unsigned TILE_H      = 64;
  localparam int unsigned TRAIN_H     = 32;
  localparam int unsigned NUM_LANES   = 16;
  localparam int unsigned NUM_BANKS   = 16;
  localparam int unsigned BANK_WORDS  = TILE_W * TILE_H / NUM_BANKS;  // 256

  typedef enum logic [0:0] {MODE_RENDER = 1'b0, MODE_TRAIN = 1'b1} mode_e;

  typedef struct packed {
    logic [15:0] x0, y0, x1, y1;   // inclusive screen-space bounding box
  } aabb_t;

  typedef struct packed {
    logic        xtile;            // "intersect" bit, MSB of the tag: spans several tiles
    logic [14:0] id;
  } gtag_t;

  typedef struct packed {
    gtag_t       tag;
    aabb_t       aabb;
    f32_t        mu_x, mu_y;       // projected mean (pixels)
    f32_t        con_x, con_z, con_y; // inverse covariance: xx, xy, yy
    f32_t        opacity;
    f32_t [2:0]  color;            // view-dependent RGB
  } gauss_t;

  localparam int unsigned GAUSS_W = $bits(gauss_t);
  localparam int unsigned GAUSS_WORDS = (GAUSS_W + 31) / 32;  // 12

  // Per-pixel state. Rendering: R,G,B,T. Training: dL/dC (3), T and
  // accumulated colour (3), T_final.
  typedef struct packed {
    f32_t        t;
    f32_t [2:0]  c;
  } rpix_t;

  typedef struct packed {
    f32_t        t;
    f32_t [2:0]  g;      // dL/dC_P
    f32_t        tf;
    f32_t [2:0]  acc;    // C_accum
  } tpix_t;

  // Gradient record handed to the raster agent.
  typedef struct packed {
    gtag_t       tag;
    f32_t [2:0]  dl_dc;
    f32_t        dl_da;
  } grad_t;

  // ------------------------------------------------------------------
  // FP32 helpers
  // ------------------------------------------------------------------
  function automatic f32_t fneg(input f32_t a);
    return {~a[31], a[30:0]};
  endfunction

  function automatic logic fis_zero(input f32_t a);
    return a[30:23] == 8'd0;
  endfunction

  function automatic f32_t fmul(input f32_t a, input f32_t b);
    logic        s;
    logic [47:0] p;
    logic signed [10:0] e;
    logic [22:0] m;
    s = a[31] ^ b[31];
    if (a[30:23] == 8'd0 || b[30:23] == 8'd0) return {s, 31'd0};
    p = {1'b1, a[22:0]} * {1'b1, b[22:0]};
    e = $signed({3'b0, a[30:23]}) + $signed({3'b0, b[30:23]}) - 11'sd127;
    if (p[47]) begin
      m = p[46:24];
      e = e + 11'sd1;
    end else begin
      m = p[45:23];
    end
    if (e <= 0)   return {s, 31'd0};
    if (e >= 255) return {s, 8'hFF, 23'd0};
    return {s, e[7:0], m};
  endfunction

  function automatic f32_t fadd(input f32_t a, input f32_t b);
    f32_t        x, y;
    logic [7:0]  d;
    logic [26:0] mx, my, sum;
    logic        sub;
    int          lz;
    logic signed [10:0] e;
    if (a[30:23] == 8'd0) return (b[30:23] == 8'd0) ? F_ZERO : b;
    if (b[30:23] == 8'd0) return a;
    if (a[30:0] >= b[30:0]) begin x = a; y = b; end
    else begin x = b; y = a; end
    d   = x[30:23] - y[30:23];
    mx  = {1'b0, 1'b1, x[22:0], 2'b00};
    my  = (d > 8'd25) ? 27'd0 : ({1'b0, 1'b1, y[22:0], 2'b00} >> d);
    sub = x[31] ^ y[31];
    sum = sub ? (mx - my) : (mx + my);
    if (sum == 27'd0) return F_ZERO;
    lz = 0;
    for (int i = 26; i >= 0; i--) begin
      if (sum[i]) break;
      lz++;
    end
    // Leading one belongs at bit 25; lz==0 means a carry into bit 26.
    e = $signed({3'b0, x[30:23]}) + 11'sd1 - 11'(lz);
    sum = sum << lz;
    if (e <= 0)   return F_ZERO;
    if (e >= 255) return {x[31], 8'hFF, 23'd0};
    return {x[31], e[7:0], sum[25:3]};
  endfunction

  function automatic f32_t fsub(input f32_t a, input f32_t b);
    return fadd(a, fneg(b));
  endfunction

  // a < b for finite values (+0 and -0 compare equal).
  function automatic logic flt(input f32_t a, input f32_t b);
    logic az, bz;
    az = fis_zero(a);
    bz = fis_zero(b);
    if (az && bz) return 1'b0;
    if (az) return ~b[31];
    if (bz) return a[31];
    if (a[31] != b[31]) return a[31];
    if (a[31]) return a[30:0] > b[30:0];
    return a[30:0] < b[30:0];
  endfunction

  function automatic f32_t fmin(input f32_t a, input f32_t b);
    return flt(b, a) ? b : a;
  endfunction

  // Unsigned integer (up to 16 bits) to float.
  function automatic f32_t u2f(input logic [15:0] v);
    int   lz;
    logic [15:0] sh;
    if (v == 16'd0) return F_ZERO;
    lz = 0;
    for (int i = 15; i >= 0; i--) begin
      if (v[i]) break;
      lz++;
    end
    sh = v << lz;
    return {1'b0, 8'(127 + 15 - lz), sh[14:0], 8'd0};
  endfunction

  // e^x. Inputs below about -87 give 0, above about 88 give infinity.
  function automatic f32_t fexp(input f32_t x);
    f32_t               t;
    logic signed [7:0]  ex;
    logic [63:0]        mag;
    logic signed [39:0] fix;      // Q15.24
    logic signed [15:0] ip;
    logic [23:0]        fr;
    logic [49:0]        acc;
    logic signed [10:0] e;
    // 2^f coefficients, Q1.24 (least-squares fit on [0,1], error 1.4e-7)
    localparam logic [24:0] C1 = 25'd11629173;  // 0.69315275
    localparam logic [24:0] C2 = 25'd4029101;  // 0.24015312
    localparam logic [24:0] C3 = 25'd936646;  // 0.05582842
    localparam logic [24:0] C4 = 25'd150804;  // 0.00898864
    localparam logic [24:0] C5 = 25'd31487;  // 0.00187679
    if (x[30:23] == 8'd0) return F_ONE;
    t  = fmul(x, F_LOG2E);
    ex = $signed(8'(t[30:23] - 8'd127));
    if (t[30:23] >= 8'd134) begin           // |t| >= 128
      return t[31] ? F_ZERO : {1'b0, 8'hFF, 23'd0};
    end
    if (t[30:23] < 8'd103) return F_ONE;     // |t| < 2^-24
    // magnitude as Q.24: {1,m} is Q1.23, shift by ex+1
    mag = {40'd0, 1'b1, t[22:0]};
    if (ex >= 0) mag = mag << (ex + 1);
    else         mag = mag >> (-(ex + 1));
    fix = t[31] ? -$signed(mag[39:0]) : $signed(mag[39:0]);
    ip  = 16'(fix >>> 24);
    fr  = fix[23:0];
    // Horner: p = 1 + f(C1 + f(C2 + f(C3 + f(C4 + f C5))))
    acc = 50'(C5);
    acc = 50'(C4) + ((acc * 50'(fr)) >> 24);
    acc = 50'(C3) + ((acc * 50'(fr)) >> 24);
    acc = 50'(C2) + ((acc * 50'(fr)) >> 24);
    acc = 50'(C1) + ((acc * 50'(fr)) >> 24);
    acc = 50'(25'd16777216) + ((acc * 50'(fr)) >> 24);  // Q1.24 in [1,2)
    if (acc[25]) acc = 50'(25'h1FF_FFFF);               // keep below 2
    e = 11'sd127 + 11'(ip);
    if (e <= 0)   return F_ZERO;
    if (e >= 255) return {1'b0, 8'hFF, 23'd0};
    return {1'b0, e[7:0], acc[23:1]};
  endfunction

endpackage
