// tb_rtgs_ctrl: runs the host handshake for tracking and mapping iterations
// with random delays on every answer from the rest of the chip. Checks the
// status sequence IDLE -> EXECUTING -> (WAIT_PRUNING) -> IDLE, that dispatch
// starts only after input_done, the Stage Buffer is flushed only after the
// pipeline has been idle, gradient_ready/pose_update appear only for
// tracking, mapping follows is_keyframe, and new_frame/mt_clr pulses.
`timescale 1ns/1ps
module tb_rtgs_ctrl;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic exec = 0, is_keyframe = 0, input_done = 0, pruning_done = 0, disp_done = 0, drain_idle = 0, flush_done = 0;
  logic [15:0] frame_id = 0;
  logic disp_start, sb_flush, mt_clr, new_frame, gradient_ready, pose_update, mapping;
  status_e status;
  rtgs_ctrl dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  int idle_run = 0;
  always @(posedge clk) idle_run <= drain_idle ? idle_run + 1 : 0;

  task automatic wait_for(ref logic sig, input string what, input int maxc);
    int t;
    t = 0;
    while (!sig && t < maxc) begin @(posedge clk); #0.1; t++; end
    check(sig, what);
  endtask

  task automatic iteration(int fid, bit key, bit expect_new);
    int d;
    bit saw_ns;
    frame_id = 16'(fid); is_keyframe = key; exec = 1;
    @(posedge clk); #0.1 exec = 0;
    check(mt_clr, "mt_clr pulse on exec");
    check(new_frame == expect_new, "new_frame");
    check(mapping == key, "mapping follows is_keyframe");
    check(status == ST_EXECUTING, "EXECUTING after exec");
    d = int'($urandom % 20);
    for (int i = 0; i < d; i++) begin
      @(posedge clk); #0.1;
      check(!disp_start, "no dispatch before input_done");
    end
    input_done = 1;
    wait_for(disp_start, "dispatch starts after input_done", 3);
    @(posedge clk); #0.1 input_done = 0;
    d = int'($urandom % 30);
    repeat (d) @(posedge clk);
    #0.1 disp_done = 1; @(posedge clk); #0.1 disp_done = 0;
    // pipeline drains with some idle glitches
    saw_ns = 0;
    for (int i = 0; i < 40 && !saw_ns; i++) begin
      int r;
      drain_idle = (i > 10) || ($urandom % 2);
      r = idle_run;
      @(posedge clk); #0.1;
      if (sb_flush) begin saw_ns = 1; check(r >= 3, "flush only after the pipeline is idle"); end
    end
    check(saw_ns, "Stage Buffer flushed");
    drain_idle = 0;
    repeat (int'($urandom % 10)) @(posedge clk);
    #0.1 flush_done = 1; @(posedge clk); #0.1 flush_done = 0;
    check(status == ST_EXECUTING, "still EXECUTING while PEs drain");
    drain_idle = 1;
    repeat (8) @(posedge clk); #0.1;
    if (key) begin
      check(status == ST_IDLE, "keyframe returns to IDLE");
      check(!gradient_ready, "no gradient_ready for a keyframe");
    end else begin
      check(status == ST_WAIT_PRUNING && gradient_ready, "tracking waits for pruning");
      repeat (int'($urandom % 10)) @(posedge clk);
      #0.1 pruning_done = 1; @(posedge clk); #0.1 pruning_done = 0;
      check(!gradient_ready, "gradient_ready drops");
      wait_for(pose_update, "pose update after pruning", 3);
      @(posedge clk); #0.1;
      check(status == ST_IDLE, "IDLE after pose update");
    end
    drain_idle = 0;
  endtask

  int n_pose = 0;
  always @(posedge clk) if (pose_update) n_pose++;
  initial begin
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    check(status == ST_IDLE, "IDLE after reset");
    iteration(5, 0, 1);
    iteration(5, 0, 0);
    iteration(5, 0, 0);
    iteration(6, 1, 1);
    iteration(7, 0, 1);
    iteration(7, 1, 0);
    check(n_pose == 4, "one pose update per tracking iteration");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
