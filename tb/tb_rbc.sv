// tb_rbc: drives BP rounds into one Rendering Backpropagation Core with
// random fragments for its two pixels (lanes randomly idle, rounds 8 or more
// cycles apart, clr between "subtiles"). A real-valued model keeps each
// pixel's running sum S of C_hat and computes dL/dalpha, the conic, mean and
// colour gradients. Checks values, lane validity, and that both results
// appear exactly 16 cycles after round_start (4 + 4 alpha-gradient cycles
// for the two pixels sharing one unit, then 8 for cov/pos).
`timescale 1ns/1ps
module tb_rbc;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clr = 0, round_start = 0, out_valid;
  logic lane_v [2];
  rb_entry_t rb [2];
  gauss2d_t g [2];
  fx_t [2:0] dldc [2];
  fx_t px [2], py [2];
  grad2d_t out_grad [2];
  rbc dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  typedef struct { int t; bit v [2]; real e [2][NG]; gid_t gid [2]; } exp_t;
  exp_t q [$];
  real S [2][3];
  always @(posedge clk) cyc <= cyc + 1;
  function automatic real r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t rnd(int lo, int hi);
    return fx_t'((longint'(lo + int'($urandom % (hi - lo + 1))) * 65536) / 1000);
  endfunction
  always @(posedge clk) if (out_valid) begin
    if (q.size() == 0) check(0, "unexpected output");
    else begin
      exp_t e;
      e = q.pop_front();
      check(cyc - e.t == 16, $sformatf("latency %0d", cyc - e.t));
      for (int s = 0; s < 2; s++) begin
        check(out_grad[s].valid == e.v[s], $sformatf("lane %0d valid", s));
        if (e.v[s]) begin
          check(out_grad[s].gid == e.gid[s], "gid");
          for (int k = 0; k < NG; k++) begin
            real d, m;
            d = r(out_grad[s].g[k]) - e.e[s][k]; m = e.e[s][k] < 0 ? -e.e[s][k] : e.e[s][k];
            check(d < 96.0 / 65536 + m / 2048 && -d < 96.0 / 65536 + m / 2048,
                  $sformatf("lane %0d g[%0d] %f vs %f", s, k, r(out_grad[s].g[k]), e.e[s][k]));
          end
        end
      end
    end
  end
  initial begin
    for (int s = 0; s < 2; s++) begin
      lane_v[s] = 0; rb[s] = '0; g[s] = '0; dldc[s] = '0; px[s] = '0; py[s] = '0;
      for (int c = 0; c < 3; c++) S[s][c] = 0.0;
    end
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      exp_t e;
      if (n % 20 == 0) begin
        clr = 1; for (int s = 0; s < 2; s++) for (int c = 0; c < 3; c++) S[s][c] = 0.0;
        @(posedge clk); #0.1 clr = 0;
      end
      e.t = cyc;
      for (int s = 0; s < 2; s++) begin
        real dlda, dlp, dx, dy;
        lane_v[s] = ($urandom % 5) != 0;
        rb[s].alpha = rnd(0, 990); rb[s].w = rnd(0, 1000);
        for (int c = 0; c < 3; c++) begin rb[s].chat[c] = rnd(0, 300); dldc[s][c] = rnd(-1000, 1000); end
        g[s].gid = gid_t'($urandom); g[s].mu_x = rnd(0, 8000); g[s].mu_y = rnd(0, 8000);
        g[s].con_a = rnd(0, 1000); g[s].con_b = rnd(-300, 300); g[s].con_c = rnd(0, 1000);
        for (int c = 0; c < 3; c++) g[s].color[c] = rnd(0, 1000);
        px[s] = rnd(0, 8000); py[s] = rnd(0, 8000);
        e.v[s] = lane_v[s]; e.gid[s] = g[s].gid;
        dlda = 0.0;
        for (int c = 0; c < 3; c++) dlda += (r(g[s].color[c]) - S[s][c]) * r(dldc[s][c]);
        if (lane_v[s]) for (int c = 0; c < 3; c++) S[s][c] += r(rb[s].chat[c]);
        dlp = -r(rb[s].alpha) * dlda;
        dx = r(px[s]) - r(g[s].mu_x); dy = r(py[s]) - r(g[s].mu_y);
        e.e[s][G_CA]  = 0.5 * dx * dx * dlp;
        e.e[s][G_CB]  = dx * dy * dlp;
        e.e[s][G_CC]  = 0.5 * dy * dy * dlp;
        e.e[s][G_MUX] = -(r(g[s].con_a) * dx + r(g[s].con_b) * dy) * dlp;
        e.e[s][G_MUY] = -(r(g[s].con_b) * dx + r(g[s].con_c) * dy) * dlp;
        for (int c = 0; c < 3; c++) e.e[s][G_CR+c] = r(rb[s].w) * r(dldc[s][c]);
      end
      q.push_back(e);
      round_start = 1;
      @(posedge clk); #0.1 round_start = 0;
      for (int s = 0; s < 2; s++) begin lane_v[s] = 0; g[s] = '0; rb[s] = '0; end  // slot 1 must be latched
      repeat (7 + (($urandom % 3) == 0 ? int'($urandom % 6) : 0)) @(posedge clk);
      #0.1;
    end
    repeat (20) @(posedge clk);
    check(q.size() == 0, "all rounds returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
