// tb_pose_gauss_unit: pose load and gradient steps in tracking, then a
// gradient stream under random back-pressure in tracking (pass-through) and
// in mapping (parameter updates); everything is checked exactly.
`timescale 1ns/1ps
module tb_pose_gauss_unit;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic mapping = 0, pose_load = 0, pose_update = 0, in_valid = 0, in_ready, out_valid, out_upd, out_ready = 0;
  pose6_t pose_init = '0, dldp = '0, pose;
  grad3d_t in_grad = '0, out_data;
  pose_gauss_unit dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  typedef struct { grad3d_t d; bit upd; } exp_t;
  exp_t q [$];
  int n_out = 0;
  always @(posedge clk) if (out_valid && out_ready) begin
    exp_t e;
    e = q.pop_front(); n_out++;
    check(out_upd == e.upd, "update flag");
    check(out_data == e.d, $sformatf("record gid %0h/%0h pw %0h/%0h dmu %0h/%0h map %0d", out_data.gid, e.d.gid, out_data.pw[0], e.d.pw[0], out_data.dmu[0], e.d.dmu[0], e.upd));
  end
  always @(posedge clk) out_ready <= $urandom % 2;
  initial begin
    pose6_t pm;
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int c = 0; c < 6; c++) pose_init[c] = fx_t'($urandom);
    pose_load = 1; @(posedge clk); #0.1 pose_load = 0;
    check(pose == pose_init, "pose loaded");
    pm = pose_init;
    for (int n = 0; n < 20; n++) begin
      for (int c = 0; c < 6; c++) begin dldp[c] = fx_t'(int'($urandom % 2000001) - 1000000); pm[c] -= dldp[c] >>> 8; end
      pose_update = 1; @(posedge clk); #0.1 pose_update = 0;
      check(pose == pm, "pose step");
    end
    for (int ph = 0; ph < 2; ph++) begin
      mapping = ph[0];
      for (int n = 0; n < 200; ) begin
        in_valid = ($urandom % 3) != 0;
        in_grad.gid = gid_t'($urandom);
        for (int c = 0; c < 3; c++) begin
          in_grad.dmu[c] = fx_t'($urandom); in_grad.dcol[c] = fx_t'($urandom); in_grad.pw[c] = fx_t'($urandom);
        end
        #0.2;
        if (in_valid && in_ready) begin
          exp_t e;
          e.d = in_grad; e.upd = mapping;
          if (mapping) for (int c = 0; c < 3; c++) begin
            e.d.pw[c] = in_grad.pw[c] - (in_grad.dmu[c] >>> 8);
            e.d.dcol[c] = -(in_grad.dcol[c] >>> 8);
          end
          q.push_back(e); n++;
        end
        @(posedge clk); #0.1;
      end
      in_valid = 0;
      repeat (10) @(posedge clk); #0.1;
    end
    check(n_out == 400, "all records out");
    check(pose == pm, "pose untouched by the stream");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
