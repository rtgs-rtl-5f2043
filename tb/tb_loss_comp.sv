// tb_loss_comp: random rendered/ground-truth colours for 16 pixels; checks
// dL/dC = C - C_gt exactly, the summed 0.5*(C - C_gt)^2 loss against a real
// model, and the one-cycle latency.
`timescale 1ns/1ps
module tb_loss_comp;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid = 0, out_valid;
  fx_t [2:0] color [NPIX], gt [NPIX], dldc [NPIX];
  fx_t loss;
  loss_comp dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    for (int p = 0; p < NPIX; p++) begin color[p] = '0; gt[p] = '0; end
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int n = 0; n < 100; n++) begin
      real l;
      l = 0.0;
      for (int p = 0; p < NPIX; p++) for (int c = 0; c < 3; c++) begin
        color[p][c] = fx_t'($urandom % 65537); gt[p][c] = fx_t'($urandom % 65537);
        l += 0.5 * (real'(color[p][c] - gt[p][c]) / 65536.0) ** 2;
      end
      in_valid = 1;
      @(posedge clk); #0.1 in_valid = 0;
      check(out_valid, "out_valid one cycle after in_valid");
      for (int p = 0; p < NPIX; p++) for (int c = 0; c < 3; c++)
        check(dldc[p][c] == color[p][c] - gt[p][c], "dL/dC");
      check((real'(loss) / 65536.0 - l) < 48.0 / 65536 && (l - real'(loss) / 65536.0) < 48.0 / 65536,
            $sformatf("loss %f vs %f", real'(loss) / 65536.0, l));
      @(posedge clk); #0.1;
      check(!out_valid, "single-cycle strobe");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
