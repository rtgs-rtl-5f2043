// tb_stage_buffer: four stage queues (modelled here) are filled with
// merged gradient vectors whose Gaussian ids collide in the table index
// (a 16-entry table is used), and the eviction port sees random
// back-pressure. At the end the buffer is flushed. Checks: the per-Gaussian
// sums of all evicted records equal the sums of everything put in, conflict
// evictions happen and are flagged, a Gaussian is never held in two partial
// records at once (each eviction of a Gaussian is either a conflict or the
// flush), every entry leaves at flush, and flush_done follows. Sums are
// compared in the 32-bit wrap-around of the hardware accumulator.
`timescale 1ns/1ps
module tb_stage_buffer;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic sq_valid [4], sq_pop [4], flush = 0, flush_done, ev_valid, ev_ready = 0, ev_conflict, busy;
  gradvec_t sq_vec [4];
  grad2d_t ev_rec;
  stage_buffer #(.NQ(4), .IDX_W(4)) dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  gradvec_t q [4][$];
  longint sum_in [64][NG], sum_out [64][NG];
  int n_conf = 0, n_ev = 0, n_fd = 0;
  bit flushing = 0;
  always_comb for (int s = 0; s < 4; s++) begin
    sq_valid[s] = q[s].size() > 0;
    sq_vec[s] = (q[s].size() > 0) ? q[s][0] : '0;
  end
  always @(posedge clk) begin
    for (int s = 0; s < 4; s++) if (sq_pop[s]) begin
      check(q[s].size() > 0, "pop of an empty queue");
      void'(q[s].pop_front());
    end
    if (ev_valid && ev_ready) begin
      n_ev++;
      check(ev_conflict || flushing, "eviction only on conflict or flush");
      for (int k = 0; k < NG; k++) sum_out[ev_rec.gid][k] += longint'(ev_rec.g[k]);
    end
    if (ev_conflict) n_conf++;
    if (flush_done) n_fd++;
    ev_ready <= ($urandom % 3) != 0;
  end
  initial begin
    for (int s = 0; s < 4; s++) sq_vec[s] = '0;
    for (int i = 0; i < 64; i++) for (int k = 0; k < NG; k++) begin sum_in[i][k] = 0; sum_out[i][k] = 0; end
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      int s;
      gradvec_t v;
      bit used [64];
      for (int i = 0; i < 64; i++) used[i] = 0;
      s = int'($urandom % 4);
      for (int i = 0; i < 16; i++) begin
        int g;
        g = int'($urandom % 40);
        v[i].valid = ($urandom % 3) != 0 && !used[g];      // merged: one record per Gaussian
        if (v[i].valid) used[g] = 1;
        v[i].gid = gid_t'(g);
        for (int k = 0; k < NG; k++) begin
          v[i].g[k] = fx_t'(int'($urandom % 20001) - 10000);
          if (v[i].valid) sum_in[g][k] += longint'(v[i].g[k]);
        end
      end
      q[s].push_back(v);
      repeat (int'($urandom % 8)) @(posedge clk);
      #0.1;
    end
    while (busy || q[0].size() + q[1].size() + q[2].size() + q[3].size() > 0) begin @(posedge clk); #0.1; end
    flushing = 1; flush = 1; @(posedge clk); #0.1 flush = 0;
    while (n_fd == 0) begin @(posedge clk); #0.1; end
    repeat (3) @(posedge clk); #0.1;
    check(n_fd == 1, "one flush_done");
    check(n_conf > 0, "conflict evictions happened");
    for (int i = 0; i < 40; i++) for (int k = 0; k < NG; k++)
      check(fx_t'(sum_out[i][k]) == fx_t'(sum_in[i][k]), $sformatf("gaussian %0d g[%0d] sum %0d vs %0d", i, k, sum_out[i][k], sum_in[i][k]));
    check(!busy, "idle after flush");
    $display("evictions %0d, conflicts %0d", n_ev, n_conf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #400000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
