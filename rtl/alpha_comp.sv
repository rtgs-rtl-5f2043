// alpha_comp: Alpha Computing Unit of a Rendering Core.
//
// For one fragment (pixel P, 2D Gaussian k) it computes
//   power = 0.5*(a dx^2 + c dy^2) + b dx dy,  d = P - mu
//   alpha = min(0.99, o * exp(-power)),   alpha < 1/255 -> 0
// which is the alpha of the splatting equation. The latency of LAT = 12
// cycles is the figure stated for alpha computing; the unit is a LAT-stage
// pipeline that accepts one fragment per cycle. The arithmetic is done in the
// first stage and the remaining stages carry the result, so only the latency,
// not the internal split, follows the paper. exp() uses a base-2 shift plus a
// quadratic fit of 2^-f (rtgs_pkg::fx_exp_neg), a choice of this design, as
// are the 0.99 clamp and 1/255 cut-off (taken from common 3DGS practice).
// dx and dy are also returned because rendering BP needs them.
// Interface: in_valid/in_* -> out_valid/out_* exactly LAT cycles later; in_tag
// travels with the fragment.
module alpha_comp import rtgs_pkg::*; #(
  parameter int LAT   = 12,
  parameter int TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t              in_px,
  input  fx_t              in_py,
  input  gauss2d_t         in_g,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fx_t              out_alpha,
  output logic [TAG_W-1:0] out_tag
);
  typedef struct packed {
    logic             v;
    fx_t              alpha;
    logic [TAG_W-1:0] tag;
  } stage_t;

  stage_t pipe [LAT];
  fx_t dx, dy, power, a_raw, a_val;

  always_comb begin
    dx    = in_px - in_g.mu_x;
    dy    = in_py - in_g.mu_y;
    power = fx_mul(FX_HALF, fx_mul(in_g.con_a, fx_mul(dx, dx)) + fx_mul(in_g.con_c, fx_mul(dy, dy)))
          + fx_mul(in_g.con_b, fx_mul(dx, dy));
    a_raw = fx_mul(in_g.opac, fx_exp_neg(power));
    if (power < 0)               a_val = '0;
    else if (a_raw > ALPHA_MAX)  a_val = ALPHA_MAX;
    else if (a_raw < ALPHA_MIN)  a_val = '0;
    else                         a_val = a_raw;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe[i] <= '0;
    end else begin
      pipe[0] <= '{v: in_valid, alpha: a_val, tag: in_tag};
      for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign out_valid = pipe[LAT-1].v;
  assign out_alpha = pipe[LAT-1].alpha;
  assign out_tag   = pipe[LAT-1].tag;
endmodule
