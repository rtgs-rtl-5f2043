// rtgs_pkg: types, constants and fixed-point helpers shared by the RTGS plug-in.
//
// All datapath values are signed 32-bit fixed point with 16 fraction bits
// (Q16.16, type fx_t). The number format is a choice of this design; the
// architecture description gives no word widths. A 2D Gaussian (gauss2d_t)
// carries what rendering needs after projection on the GPU: 2D mean, conic
// (inverse 2D covariance a, b, c), opacity and RGB colour. A fragment
// gradient (grad2d_t) carries the 2D mean, conic and colour gradients of one
// Gaussian; gradients of the same Gaussian are merged by plain addition.
package rtgs_pkg;

  localparam int FX_W = 32;
  localparam int FX_F = 16;
  typedef logic signed [FX_W-1:0] fx_t;

  localparam fx_t FX_ONE    = 32'sd65536;
  localparam fx_t FX_HALF   = 32'sd32768;
  localparam fx_t ALPHA_MAX = 32'sd64881;   // 0.99
  localparam fx_t ALPHA_MIN = 32'sd257;     // 1/255
  localparam fx_t LOG2E     = 32'sd94548;   // log2(e)
  localparam fx_t EXP_C1    = 32'sd44014;   // 2^-f ~ 1 - C1 f + C2 f^2
  localparam fx_t EXP_C2    = 32'sd11246;

  // Subtile geometry: 4x4 pixels, rendered by 8 pixel pairs.
  localparam int NPIX  = 16;
  localparam int NPAIR = 8;
  localparam int PIX_W = 4;

  localparam int GID_W = 16;
  typedef logic [GID_W-1:0] gid_t;

  // Gradient vector layout (index into grad2d_t.g)
  localparam int NG    = 8;
  localparam int G_MUX = 0;
  localparam int G_MUY = 1;
  localparam int G_CA  = 2;
  localparam int G_CB  = 3;
  localparam int G_CC  = 4;
  localparam int G_CR  = 5;   // colour R, G, B at 5, 6, 7

  typedef struct packed {
    gid_t          gid;
    fx_t           mu_x;
    fx_t           mu_y;
    fx_t           con_a;
    fx_t           con_b;
    fx_t           con_c;
    fx_t           opac;
    fx_t [2:0]     color;
  } gauss2d_t;

  typedef struct packed {
    logic          valid;
    gid_t          gid;
    fx_t [NG-1:0]  g;
  } grad2d_t;

  typedef grad2d_t [NPIX-1:0] gradvec_t;

  // Intermediate values kept from rendering for rendering BP (R&B buffer)
  typedef struct packed {
    fx_t [2:0]     chat;    // C_hat = T * alpha * C_k
    fx_t           alpha;
    fx_t           w;       // T * alpha
  } rb_entry_t;

  // 3D data of a Gaussian after projection: world mean, camera-space mean, 1/z
  typedef struct packed {
    fx_t [2:0]     pw;
    fx_t [2:0]     pc;
    fx_t           inv_z;
  } gauss3d_t;

  // Gaussian-level 3D gradient written back to the GPU
  typedef struct packed {
    gid_t          gid;
    fx_t [2:0]     dmu;     // dL/d(world mean)
    fx_t [2:0]     dcol;    // dL/d(colour)
    fx_t [2:0]     pw;      // world mean the gradient refers to
  } grad3d_t;

  // Pose gradient / pose: translation (0..2), small-angle rotation (3..5)
  typedef fx_t [5:0] pose6_t;

  // One subtile of work
  typedef struct packed {
    logic [15:0]   st_id;   // global subtile id (indexes the WSU configuration)
    logic [15:0]   g_start; // first entry of its sorted 2D Gaussian list
    logic [7:0]    g_count; // number of Gaussians in the list
    logic [15:0]   p_start; // first of its 16 ground-truth pixels (row-major in the subtile)
    logic [15:0]   x0;      // pixel column of the subtile's top-left pixel
    logic [15:0]   y0;      // pixel row
  } subtile_t;

  // Pixel pairing: pair i is rendered by RC i (pixel a, pixel b)
  typedef struct packed {
    logic [PIX_W-1:0] a;
    logic [PIX_W-1:0] b;
  } pair_t;
  typedef pair_t [NPAIR-1:0] pair_cfg_t;

  typedef enum logic [1:0] {
    ST_IDLE        = 2'd0,
    ST_EXECUTING   = 2'd1,
    ST_WAIT_PRUNING= 2'd2
  } status_e;

  function automatic fx_t fx_mul(fx_t a, fx_t b);
    logic signed [2*FX_W-1:0] p;
    p = a * b;
    return fx_t'(p >>> FX_F);
  endfunction

  function automatic fx_t fx_int(logic [15:0] i);
    return fx_t'({16'd0, i}) <<< FX_F;
  endfunction

  // exp(-x) for x >= 0: 2^-(x log2 e) = 2^-n * 2^-f, with 2^-f by a quadratic fit
  function automatic fx_t fx_exp_neg(fx_t x);
    fx_t q, f, p;
    int  n;
    if (x <= 0) return FX_ONE;
    q = fx_mul(x, LOG2E);
    n = int'(q >>> FX_F);
    f = q & 32'sh0000_FFFF;
    p = FX_ONE - fx_mul(f, EXP_C1) + fx_mul(fx_mul(f, f), EXP_C2);
    if (n >= 16) return '0;
    return p >>> n;
  endfunction

  function automatic pair_cfg_t default_pairs();
    pair_cfg_t c;
    for (int i = 0; i < NPAIR; i++) begin
      c[i].a = PIX_W'(2*i);
      c[i].b = PIX_W'(2*i+1);
    end
    return c;
  endfunction

endpackage
