// covpos_grad: 2D Covariance/Position Gradient Computing Unit of an RBC.
//
// From dL/dalpha of a fragment it derives the fragment-level 2D gradients of
// its Gaussian. With alpha = o*exp(-power) and
// power = 0.5(a dx^2 + c dy^2) + b dx dy,  d = P - mu:
//   dL/dpower = -alpha * dL/dalpha
//   dL/da = 0.5 dx^2 dL/dpower, dL/db = dx dy dL/dpower, dL/dc = 0.5 dy^2 dL/dpower
//   dL/dmu_x = -(a dx + b dy) dL/dpower,  dL/dmu_y = -(b dx + c dy) dL/dpower
//   dL/dC_k  = (T alpha) * dL/dC_P
// The paper names the unit and its 8-cycle latency (LAT); the equations are
// the standard derivatives of the splatting formula and are this design's.
// The gradient is the conic (inverse covariance) gradient; conversion to the
// covariance is left to the preprocessing BP. LAT-stage pipeline.
module covpos_grad import rtgs_pkg::*; #(
  parameter int LAT = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  fx_t       in_dlda,
  input  fx_t       in_alpha,
  input  fx_t       in_w,
  input  fx_t [2:0] in_dldc,
  input  fx_t       in_dx,
  input  fx_t       in_dy,
  input  gauss2d_t  in_g,
  output grad2d_t   out_grad          // out_grad.valid is the output strobe
);
  grad2d_t pipe [LAT];
  grad2d_t s0;
  fx_t dlp;

  always_comb begin
    dlp        = -fx_mul(in_alpha, in_dlda);
    s0.valid   = in_valid;
    s0.gid     = in_g.gid;
    s0.g[G_CA] = fx_mul(fx_mul(FX_HALF, fx_mul(in_dx, in_dx)), dlp);
    s0.g[G_CB] = fx_mul(fx_mul(in_dx, in_dy), dlp);
    s0.g[G_CC] = fx_mul(fx_mul(FX_HALF, fx_mul(in_dy, in_dy)), dlp);
    s0.g[G_MUX] = -fx_mul(fx_mul(in_g.con_a, in_dx) + fx_mul(in_g.con_b, in_dy), dlp);
    s0.g[G_MUY] = -fx_mul(fx_mul(in_g.con_b, in_dx) + fx_mul(in_g.con_c, in_dy), dlp);
    for (int c = 0; c < 3; c++) s0.g[G_CR+c] = fx_mul(in_w, in_dldc[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe[i] <= '0;
    end else begin
      pipe[0] <= s0;
      for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign out_grad = pipe[LAT-1];
endmodule
