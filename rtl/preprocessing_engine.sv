// preprocessing_engine: Preprocessing Engine (PE) with its Preprocessing
// Backpropagation Core (PBC).
//
// Turns the Gaussian-level 2D gradients from the Stage Buffer into 3D
// gradients (Preprocessing BP) and, for tracking, into the Gaussian's share
// of the camera-pose gradient. Structure after the paper: a 3D buffer (queue
// of Gaussians waiting, each with its 2D gradient and 3D data), a 3D gradient
// unit, a camera pose gradient unit and an output buffer.
// Arithmetic (this design's; the paper gives the units, not their equations).
// With camera-space mean p = (x, y, z), 1/z and focal lengths fx, fy, the
// projection u = fx x/z + cx, v = fy y/z + cy gives
//   g = dL/dp = ( fx/z * gu,  fy/z * gv,  -(fx x gu + fy y gv)/z^2 )
//   dL/dmu_world = R^T g                       (R: world-to-camera rotation)
//   dL/dP_k = ( g ,  p x g )                   (translation, small rotation)
// Colour gradients pass through (DC colour). The conic gradients are not
// propagated to the 3D covariance (scale/rotation) in this design.
// Timing: two register stages after the 3D buffer; a Gaussian leaves the 3D
// buffer only when the output buffer has room for it and what is in flight.
// pose_valid/pose_grad is produced for every Gaussian and has no back-
// pressure (the merging tree always accepts); out_* carries the 3D gradient.
module preprocessing_engine import rtgs_pkg::*; #(
  parameter int D3 = 4,
  parameter int OD = 4
) (
  input  logic      clk,
  input  logic      rst_n,
  input  fx_t       cam_fx,
  input  fx_t       cam_fy,
  input  fx_t [8:0] cam_R,          // row-major world-to-camera rotation
  input  logic      in_valid,
  input  grad2d_t   in_grad,
  input  gauss3d_t  in_g3,
  output logic      in_ready,
  output logic      out_valid,
  output grad3d_t   out_grad,
  input  logic      out_ready,
  output logic      pose_valid,
  output pose6_t    pose_grad,
  output logic      busy
);
  typedef struct packed {
    grad2d_t  gr;
    gauss3d_t g3;
  } item_t;

  item_t   b_dout;
  logic    b_full, b_empty, b_pop;
  logic [$clog2(D3+1)-1:0] b_cnt;
  sync_fifo #(.T(item_t), .DEPTH(D3)) u_3d (
    .clk, .rst_n, .push(in_valid), .din('{gr: in_grad, g3: in_g3}), .pop(b_pop),
    .dout(b_dout), .full(b_full), .empty(b_empty), .count(b_cnt)
  );
  assign in_ready = !b_full;

  logic o_full, o_empty;
  logic [$clog2(OD+1)-1:0] o_cnt;
  logic s1_v, s2_v;
  assign b_pop = !b_empty && ((32'(o_cnt) + 32'(s1_v) + 32'(s2_v)) < OD);

  // stage 1: 3D gradient in camera space
  fx_t [2:0] s1_g;
  item_t     s1_it;
  // stage 2: world-frame gradient and pose gradient
  grad3d_t   s2_o;
  pose6_t    s2_p;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v <= 1'b0; s2_v <= 1'b0; s1_g <= '0; s1_it <= '0; s2_o <= '0; s2_p <= '0;
    end else begin
      s1_v <= b_pop;
      if (b_pop) begin
        fx_t jx, jy, iz2, gu, gv;
        jx  = fx_mul(cam_fx, b_dout.g3.inv_z);
        jy  = fx_mul(cam_fy, b_dout.g3.inv_z);
        iz2 = fx_mul(b_dout.g3.inv_z, b_dout.g3.inv_z);
        gu  = b_dout.gr.g[G_MUX];
        gv  = b_dout.gr.g[G_MUY];
        s1_g[0] <= fx_mul(jx, gu);
        s1_g[1] <= fx_mul(jy, gv);
        s1_g[2] <= -fx_mul(fx_mul(fx_mul(cam_fx, b_dout.g3.pc[0]), gu)
                         + fx_mul(fx_mul(cam_fy, b_dout.g3.pc[1]), gv), iz2);
        s1_it   <= b_dout;
      end
      s2_v <= s1_v;
      if (s1_v) begin
        fx_t [2:0] p;
        p = s1_it.g3.pc;
        for (int c = 0; c < 3; c++) begin
          s2_o.dmu[c]  <= fx_mul(cam_R[c], s1_g[0]) + fx_mul(cam_R[3+c], s1_g[1]) + fx_mul(cam_R[6+c], s1_g[2]);
          s2_o.dcol[c] <= s1_it.gr.g[G_CR+c];
          s2_o.pw[c]   <= s1_it.g3.pw[c];
          s2_p[c]      <= s1_g[c];
        end
        s2_o.gid <= s1_it.gr.gid;
        s2_p[3]  <= fx_mul(p[1], s1_g[2]) - fx_mul(p[2], s1_g[1]);
        s2_p[4]  <= fx_mul(p[2], s1_g[0]) - fx_mul(p[0], s1_g[2]);
        s2_p[5]  <= fx_mul(p[0], s1_g[1]) - fx_mul(p[1], s1_g[0]);
      end
    end
  end

  sync_fifo #(.T(grad3d_t), .DEPTH(OD)) u_out (
    .clk, .rst_n, .push(s2_v), .din(s2_o), .pop(out_ready), .dout(out_grad),
    .full(o_full), .empty(o_empty), .count(o_cnt)
  );
  assign out_valid  = !o_empty;
  assign pose_valid = s2_v;
  assign pose_grad  = s2_p;
  assign busy       = !b_empty || s1_v || s2_v || !o_empty;

  a_out_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) s2_v |-> !o_full);
endmodule
