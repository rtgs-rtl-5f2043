// tb_alpha_comp: random fragments against a real-valued model of
// alpha = min(0.99, o * exp(-power)); checks value (within the exp
// approximation error), the 1/255 and power<0 cut-offs, the tag, and that
// every result appears exactly 12 cycles after its input.
`timescale 1ns/1ps
module tb_alpha_comp;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid = 0, out_valid;
  fx_t in_px = '0, in_py = '0, out_alpha;
  gauss2d_t in_g = '0;
  logic [7:0] in_tag = '0, out_tag;
  alpha_comp dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  typedef struct { int t; real a; logic [7:0] tag; } exp_t;
  exp_t q [$];
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic fx_t rnd(int lo, int hi); // milli-units
    return fx_t'((longint'(lo + int'($urandom % (hi - lo + 1))) * 65536) / 1000);
  endfunction

  always @(posedge clk) if (out_valid) begin
    if (q.size() == 0) check(0, "unexpected output");
    else begin
      exp_t e; real d;
      e = q.pop_front();
      check(cyc - e.t == 12, $sformatf("latency %0d", cyc - e.t));
      check(out_tag == e.tag, "tag");
      d = r(out_alpha) - e.a; if (d < 0) d = -d;
      if (!(e.a > 0.0035 && e.a < 0.0045)) check(d < 0.004, $sformatf("alpha %f vs %f", r(out_alpha), e.a));
    end
  end

  initial begin
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      real dx, dy, pw, a;
      in_valid = ($urandom % 4) != 0;
      in_px = rnd(0, 16000); in_py = rnd(0, 16000);
      in_g.mu_x = rnd(0, 16000); in_g.mu_y = rnd(0, 16000);
      in_g.con_a = rnd(10, 1500); in_g.con_c = rnd(10, 1500); in_g.con_b = rnd(-100, 100);
      if (n % 50 == 7) in_g.con_b = rnd(3000, 4000);    // indefinite: power can go negative
      in_g.opac = rnd(0, 1000);
      in_tag = 8'($urandom);
      dx = r(in_px) - r(in_g.mu_x); dy = r(in_py) - r(in_g.mu_y);
      pw = 0.5 * (r(in_g.con_a) * dx * dx + r(in_g.con_c) * dy * dy) + r(in_g.con_b) * dx * dy;
      a  = r(in_g.opac) * $exp(-pw);
      if (a > 0.99) a = 0.99;
      if (pw < 0 || a < 1.0 / 255.0) a = 0.0;
      if (in_valid) q.push_back('{cyc, a, in_tag});
      @(posedge clk); #0.1;
    end
    in_valid = 0;
    repeat (20) @(posedge clk);
    check(q.size() == 0, "all results returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
