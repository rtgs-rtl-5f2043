// tb_gmu: four REs offer random 16-lane gradient vectors (Gaussian ids drawn
// from a small set so lanes repeat, some lanes invalid) under random output
// back-pressure. For every input vector the model forms one merged record per
// distinct Gaussian, in order of first appearance. Checks: each output
// vector equals the model of the oldest outstanding vector of some RE, the
// vectors of one RE stay in order, no Gaussian appears twice in an output,
// and nothing is lost.
`timescale 1ns/1ps
module tb_gmu;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic in_valid [4], in_ready [4], out_valid, out_ready = 0, busy;
  gradvec_t in_vec [4], out_vec;
  gmu dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  typedef grad2d_t rec_q_t [$];
  typedef struct { grad2d_t r [16]; int n; } mvec_t;
  mvec_t q [4][$];
  int n_in = 0, n_out = 0, sent [4];

  function automatic mvec_t merge(gradvec_t v);
    mvec_t m;
    m.n = 0;
    for (int i = 0; i < 16; i++) if (v[i].valid) begin
      int f;
      f = -1;
      for (int j = 0; j < m.n; j++) if (m.r[j].gid == v[i].gid) f = j;
      if (f < 0) begin m.r[m.n] = v[i]; m.n++; end
      else for (int k = 0; k < NG; k++) m.r[f].g[k] += v[i].g[k];
    end
    return m;
  endfunction

  function automatic gradvec_t rnd_vec();
    gradvec_t v;
    for (int i = 0; i < 16; i++) begin
      v[i].valid = ($urandom % 5) != 0;
      v[i].gid = gid_t'($urandom % 6);
      for (int k = 0; k < NG; k++) v[i].g[k] = fx_t'(int'($urandom % 200001) - 100000);
    end
    return v;
  endfunction

  always @(posedge clk) out_ready <= ($urandom % 4) != 0;
  always @(posedge clk) if (out_valid && out_ready) begin
    mvec_t got;
    int hit;
    got.n = 0;
    for (int i = 0; i < 16; i++) if (out_vec[i].valid) begin got.r[got.n] = out_vec[i]; got.n++; end
    for (int a = 0; a < got.n; a++) for (int b = a + 1; b < got.n; b++)
      check(got.r[a].gid != got.r[b].gid, "Gaussian merged completely");
    hit = -1;
    for (int s = 0; s < 4 && hit < 0; s++) if (q[s].size() > 0 && q[s][0].n == got.n) begin
      bit same;
      same = 1;
      for (int j = 0; j < got.n; j++) if (got.r[j] != q[s][0].r[j]) same = 0;
      if (same) hit = s;
    end
    check(hit >= 0, "output matches the oldest vector of an RE");
    if (hit >= 0) void'(q[hit].pop_front());
    n_out++;
  end

  initial begin
    for (int s = 0; s < 4; s++) begin in_valid[s] = 0; in_vec[s] = '0; sent[s] = 0; end
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    while (n_in < 400) begin
      for (int s = 0; s < 4; s++) if (!in_valid[s] && ($urandom % 2) && sent[s] < 100) begin
        in_valid[s] = 1; in_vec[s] = rnd_vec();
      end
      #0.2;
      for (int s = 0; s < 4; s++) if (in_valid[s] && in_ready[s]) begin
        q[s].push_back(merge(in_vec[s])); n_in++; sent[s]++;
      end
      @(posedge clk); #0.1;
      for (int s = 0; s < 4; s++) if (in_valid[s] && q[s].size() > 0 && sent[s] > 0) begin
        // drop the offer once accepted (accepted offers were recorded above)
      end
      for (int s = 0; s < 4; s++) in_valid[s] = in_valid[s] && !last_acc[s];
    end
    for (int s = 0; s < 4; s++) in_valid[s] = 0;
    repeat (100) @(posedge clk);
    check(n_out == 400, $sformatf("all vectors out (%0d)", n_out));
    check(!busy, "idle after draining");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  logic last_acc [4];
  always @(posedge clk) for (int s = 0; s < 4; s++) last_acc[s] <= in_valid[s] && in_ready[s];
  initial begin #200000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
