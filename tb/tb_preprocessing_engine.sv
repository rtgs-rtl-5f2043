// tb_preprocessing_engine: a stream of Gaussian-level 2D gradients with
// their 3D data under random input and output back-pressure. A real-valued
// model of the projection Jacobian, R^T and p x g gives the expected 3D
// gradient and pose share of each Gaussian; checked in order, with the
// colour gradient and world mean passed through unchanged.
`timescale 1ns/1ps
module tb_preprocessing_engine;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  fx_t cam_fx, cam_fy;
  fx_t [8:0] cam_R;
  logic in_valid = 0, in_ready, out_valid, out_ready = 0, pose_valid, busy;
  grad2d_t in_grad = '0;
  gauss3d_t in_g3 = '0;
  grad3d_t out_grad;
  pose6_t pose_grad;
  preprocessing_engine dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  function automatic real r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t rnd(int lo, int hi);
    return fx_t'((longint'(lo + int'($urandom % (hi - lo + 1))) * 65536) / 1000);
  endfunction
  function automatic bit near(real a, real b);
    real m; m = b < 0 ? -b : b;
    return (a - b) < 64.0 / 65536 + m / 1024 && (b - a) < 64.0 / 65536 + m / 1024;
  endfunction
  typedef struct { gid_t gid; real dmu [3]; fx_t [2:0] dcol, pw; real pg [6]; } exp_t;
  exp_t qo [$], qp [$];
  int n_in = 0, n_out = 0, n_pose = 0;
  always @(posedge clk) begin
    if (out_valid && out_ready) begin
      exp_t e;
      n_out++;
      e = qo.pop_front();
      check(out_grad.gid == e.gid, "gid order");
      check(out_grad.dcol == e.dcol && out_grad.pw == e.pw, "colour / mean pass-through");
      for (int c = 0; c < 3; c++) check(near(r(out_grad.dmu[c]), e.dmu[c]),
        $sformatf("dmu[%0d] %f vs %f", c, r(out_grad.dmu[c]), e.dmu[c]));
    end
    if (pose_valid) begin
      exp_t e;
      n_pose++;
      e = qp.pop_front();
      for (int c = 0; c < 6; c++) check(near(r(pose_grad[c]), e.pg[c]),
        $sformatf("pose[%0d] %f vs %f", c, r(pose_grad[c]), e.pg[c]));
    end
  end
  always @(posedge clk) out_ready <= ($urandom % 3) != 0;
  initial begin
    real a;
    cam_fx = rnd(200, 800); cam_fy = rnd(200, 800);
    a = 0.3;
    cam_R = '{fx_t'($rtoi($cos(a) * 65536)), fx_t'($rtoi(-$sin(a) * 65536)), 32'sd0,
              fx_t'($rtoi($sin(a) * 65536)), fx_t'($rtoi($cos(a) * 65536)), 32'sd0,
              32'sd0, 32'sd0, 32'sd65536};
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    while (n_in < 300) begin
      exp_t e; real x, y, z, gu, gv, g [3];
      in_valid = ($urandom % 4) != 0;
      in_grad.valid = 1; in_grad.gid = gid_t'($urandom);
      for (int k = 0; k < NG; k++) in_grad.g[k] = rnd(-2000, 2000);
      in_g3.pc[0] = rnd(-2000, 2000); in_g3.pc[1] = rnd(-2000, 2000); in_g3.pc[2] = rnd(1000, 8000);
      in_g3.inv_z = fx_t'((64'sd1 << 32) / 64'(in_g3.pc[2]));
      for (int c = 0; c < 3; c++) in_g3.pw[c] = rnd(-5000, 5000);
      #0.2;
      if (in_valid && in_ready) begin
        x = r(in_g3.pc[0]); y = r(in_g3.pc[1]); z = r(in_g3.pc[2]);
        gu = r(in_grad.g[G_MUX]); gv = r(in_grad.g[G_MUY]);
        g[0] = r(cam_fx) / z * gu; g[1] = r(cam_fy) / z * gv;
        g[2] = -(r(cam_fx) * x * gu + r(cam_fy) * y * gv) / (z * z);
        e.gid = in_grad.gid;
        for (int c = 0; c < 3; c++) begin
          e.dmu[c] = r(cam_R[c]) * g[0] + r(cam_R[3+c]) * g[1] + r(cam_R[6+c]) * g[2];
          e.dcol[c] = in_grad.g[G_CR+c]; e.pw[c] = in_g3.pw[c];
          e.pg[c] = g[c];
        end
        e.pg[3] = y * g[2] - z * g[1]; e.pg[4] = z * g[0] - x * g[2]; e.pg[5] = x * g[1] - y * g[0];
        qo.push_back(e); qp.push_back(e);
        n_in++;
      end
      @(posedge clk); #0.1;
    end
    in_valid = 0;
    repeat (50) @(posedge clk);
    check(n_out == 300 && n_pose == 300, $sformatf("all Gaussians out (%0d, %0d)", n_out, n_pose));
    check(!busy, "idle after draining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
