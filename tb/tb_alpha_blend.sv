// tb_alpha_blend: random (T, alpha, colour) against a real-valued model of
// w = T*alpha, C_hat = w*C, T' = T - w and the 1e-4 termination test;
// checks values, tag and the 3-cycle latency.
`timescale 1ns/1ps
module tb_alpha_blend;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid = 0, out_valid, out_term;
  fx_t in_T = '0, in_alpha = '0, out_T, out_w;
  fx_t [2:0] in_color = '0, out_chat;
  logic [7:0] in_tag = '0, out_tag;
  alpha_blend dut (.*);

  int checks = 0, failures = 0, cyc = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  typedef struct { int t; real w, tn; real ch [3]; logic [7:0] tag; } exp_t;
  exp_t q [$];
  always @(posedge clk) cyc <= cyc + 1;
  function automatic real r(fx_t v); return real'(v) / 65536.0; endfunction
  function automatic bit near(real a, real b, real tol); return (a - b < tol) && (b - a < tol); endfunction

  always @(posedge clk) if (out_valid) begin
    if (q.size() == 0) check(0, "unexpected output");
    else begin
      exp_t e;
      e = q.pop_front();
      check(cyc - e.t == 3, $sformatf("latency %0d", cyc - e.t));
      check(out_tag == e.tag, "tag");
      check(near(r(out_w), e.w, 4.0 / 65536), "w");
      check(near(r(out_T), e.tn, 4.0 / 65536), "T'");
      for (int c = 0; c < 3; c++) check(near(r(out_chat[c]), e.ch[c], 6.0 / 65536), "C_hat");
      if (!near(e.tn, 7.0 / 65536, 4.0 / 65536)) check(out_term == (e.tn < 7.0 / 65536), "term");
    end
  end

  initial begin
    exp_t e;
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int n = 0; n < 800; n++) begin
      in_valid = ($urandom % 3) != 0;
      in_T     = fx_t'($urandom % 65537);
      if (n % 4 == 0) in_T = fx_t'($urandom % 1200);   // near the threshold
      in_alpha = fx_t'($urandom % 64882);
      for (int c = 0; c < 3; c++) in_color[c] = fx_t'($urandom % 65537);
      in_tag = 8'($urandom);
      e.t = cyc; e.tag = in_tag;
      e.w = r(in_T) * r(in_alpha); e.tn = r(in_T) - e.w;
      for (int c = 0; c < 3; c++) e.ch[c] = e.w * r(in_color[c]);
      if (in_valid) q.push_back(e);
      @(posedge clk); #0.1;
    end
    in_valid = 0;
    repeat (10) @(posedge clk);
    check(q.size() == 0, "all results returned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
