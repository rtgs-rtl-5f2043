// tb_alpha_grad: random operands against dL/dalpha = sum_c (C_c - S_c) *
// dL/dC_c in real arithmetic; checks value, tag and the 4-cycle latency.
`timescale 1ns/1ps
module tb_alpha_grad;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid = 0, out_valid;
  fx_t [2:0] in_color = '0, in_s = '0, in_dldc = '0;
  logic [3:0] in_tag = '0, out_tag;
  fx_t out_dlda;
  alpha_grad dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  typedef struct { int t; real v; logic [3:0] tag; } exp_t;
  exp_t q [$];
  always @(posedge clk) cyc <= cyc + 1;
  always @(posedge clk) if (out_valid) begin
    if (q.size() == 0) check(0, "unexpected output");
    else begin
      exp_t e; real d;
      e = q.pop_front();
      check(cyc - e.t == 4, $sformatf("latency %0d", cyc - e.t));
      check(out_tag == e.tag, "tag");
      d = real'(out_dlda) / 65536.0 - e.v;
      check(d < 4.0 / 65536 && d > -4.0 / 65536, $sformatf("dlda %f vs %f", real'(out_dlda) / 65536.0, e.v));
    end
  end
  initial begin
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int n = 0; n < 600; n++) begin
      real v;
      in_valid = ($urandom % 3) != 0;
      v = 0.0;
      for (int c = 0; c < 3; c++) begin
        in_color[c] = fx_t'($urandom % 65537);
        in_s[c]     = fx_t'($urandom % 131073);
        in_dldc[c]  = fx_t'(int'($urandom % 131073) - 65536);
        v += real'(in_color[c] - in_s[c]) / 65536.0 * real'(in_dldc[c]) / 65536.0;
      end
      in_tag = 4'($urandom);
      if (in_valid) q.push_back('{cyc, v, in_tag});
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
