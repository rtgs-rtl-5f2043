// tb_merging_tree: random bursts of pose gradients on random subsets of the
// 16 inputs; after busy falls the running sum must equal the integer sum of
// everything applied since clr, which is checked after every burst.
`timescale 1ns/1ps
module tb_merging_tree;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic clr = 0, busy;
  logic in_valid [16];
  pose6_t in_grad [16];
  pose6_t sum;
  merging_tree dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  pose6_t ref_sum;
  initial begin
    for (int i = 0; i < 16; i++) begin in_valid[i] = 0; in_grad[i] = '0; end
    ref_sum = '0;
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int b = 0; b < 40; b++) begin
      if (b % 10 == 0) begin clr = 1; ref_sum = '0; @(posedge clk); #0.1 clr = 0; end
      for (int n = 0; n < 1 + int'($urandom % 8); n++) begin
        for (int i = 0; i < 16; i++) begin
          in_valid[i] = $urandom % 2;
          for (int c = 0; c < 6; c++) in_grad[i][c] = fx_t'(int'($urandom % 200001) - 100000);
          if (in_valid[i]) for (int c = 0; c < 6; c++) ref_sum[c] += in_grad[i][c];
        end
        @(posedge clk); #0.1;
      end
      for (int i = 0; i < 16; i++) in_valid[i] = 0;
      check(busy, "busy while the tree holds data");
      repeat (8) @(posedge clk); #0.1;
      check(!busy, "idle after draining");
      for (int c = 0; c < 6; c++) check(sum[c] == ref_sum[c], $sformatf("sum[%0d]", c));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
