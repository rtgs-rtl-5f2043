// tb_sync_fifo: random push/pop traffic against a queue model; checks head
// data, full/empty/count, and that a push while full is ignored.
`timescale 1ns/1ps
module tb_sync_fifo;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic push = 0, pop = 0, full, empty;
  logic [7:0] din = '0, dout;
  logic [2:0] count;
  sync_fifo #(.T(logic [7:0]), .DEPTH(4)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic [7:0] q [$];
  bit was_full;
  initial begin
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      check(count == 3'(q.size()), "count");
      check(empty == (q.size() == 0), "empty");
      check(full == (q.size() == 4), "full");
      if (q.size() > 0) check(dout == q[0], "head");
      pop  = (q.size() > 0) && ($urandom % 2);
      push = $urandom % 2;
      din  = 8'($urandom);
      was_full = (q.size() == 4);
      @(posedge clk); #0.1;
      if (pop) void'(q.pop_front());
      if (push && !was_full) q.push_back(din);
      push = 0; pop = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
