// tb_covpos_grad: random fragments against real-valued chain-rule formulas
// for the conic, mean and colour gradients; checks values, the Gaussian id
// and the 8-cycle latency.
`timescale 1ns/1ps
module tb_covpos_grad;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid = 0;
  fx_t in_dlda = '0, in_alpha = '0, in_w = '0, in_dx = '0, in_dy = '0;
  fx_t [2:0] in_dldc = '0;
  gauss2d_t in_g = '0;
  grad2d_t out_grad;
  covpos_grad dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  typedef struct { int t; real g [NG]; gid_t gid; } exp_t;
  exp_t q [$];
  always @(posedge clk) cyc <= cyc + 1;
  function automatic real r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t rnd(int lo, int hi);
    return fx_t'((longint'(lo + int'($urandom % (hi - lo + 1))) * 65536) / 1000);
  endfunction
  always @(posedge clk) if (out_grad.valid) begin
    if (q.size() == 0) check(0, "unexpected output");
    else begin
      exp_t e;
      e = q.pop_front();
      check(cyc - e.t == 8, $sformatf("latency %0d", cyc - e.t));
      check(out_grad.gid == e.gid, "gid");
      for (int k = 0; k < NG; k++) begin
        real d;
        d = r(out_grad.g[k]) - e.g[k];
        check(d < 12.0 / 65536 + (e.g[k] < 0 ? -e.g[k] : e.g[k]) / 4096.0 && d > -12.0 / 65536 - (e.g[k] < 0 ? -e.g[k] : e.g[k]) / 4096.0, $sformatf("g[%0d] %f vs %f", k, r(out_grad.g[k]), e.g[k]));
      end
    end
  end
  initial begin
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      exp_t e; real dlp, dx, dy;
      in_valid = ($urandom % 3) != 0;
      in_dlda = rnd(-1000, 1000); in_alpha = rnd(0, 990); in_w = rnd(0, 1000);
      in_dx = rnd(-4000, 4000); in_dy = rnd(-4000, 4000);
      for (int c = 0; c < 3; c++) in_dldc[c] = rnd(-1000, 1000);
      in_g.gid = gid_t'($urandom);
      in_g.con_a = rnd(0, 1000); in_g.con_b = rnd(-300, 300); in_g.con_c = rnd(0, 1000);
      dlp = -r(in_alpha) * r(in_dlda); dx = r(in_dx); dy = r(in_dy);
      e.t = cyc; e.gid = in_g.gid;
      e.g[G_CA]  = 0.5 * dx * dx * dlp;
      e.g[G_CB]  = dx * dy * dlp;
      e.g[G_CC]  = 0.5 * dy * dy * dlp;
      e.g[G_MUX] = -(r(in_g.con_a) * dx + r(in_g.con_b) * dy) * dlp;
      e.g[G_MUY] = -(r(in_g.con_b) * dx + r(in_g.con_c) * dy) * dlp;
      for (int c = 0; c < 3; c++) e.g[G_CR+c] = r(in_w) * r(in_dldc[c]);
      if (in_valid) q.push_back(e);
      @(posedge clk); #0.1;
    end
    in_valid = 0;
    repeat (12) @(posedge clk);
    check(q.size() == 0, "all results returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
