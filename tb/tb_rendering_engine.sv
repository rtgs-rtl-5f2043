// tb_rendering_engine: one Rendering Engine processes subtiles from a
// modelled Gaussian cache port (random grant delays) into a modelled GMU
// that is often not ready. Per subtile a sequential model (same Q16.16
// arithmetic) renders each pixel, takes the loss and backpropagates each
// pixel's fragments; the output vectors summed per Gaussian must match the
// model's per-Gaussian sums, and the loss must match exactly. The subtile is
// then re-run with the pairing the RE returned (the results must not change,
// the pairing must be a permutation of the 16 pixels), and a third run uses a
// different list. Also checked: every output lane belongs to a Gaussian of
// the list, st_ready only when idle, and that BP stalled on a full output
// queue at least once.
`timescale 1ns/1ps
module tb_rendering_engine;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic st_valid = 0, st_cfg_valid = 0, st_ready, mem_req, mem_kind, mem_gnt, mem_rvalid = 0;
  subtile_t st_desc = '0;
  pair_cfg_t st_cfg = '0, done_cfg;
  logic [15:0] mem_addr, done_st_id;
  gauss2d_t mem_rg = '0;
  fx_t [2:0] mem_rpix = '0;
  logic out_valid, out_ready = 0, done_valid;
  gradvec_t out_vec;
  fx_t done_loss;
  rendering_engine dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  gauss2d_t M2 [64];
  fx_t [2:0] MP [16];
  // cache port model
  assign mem_gnt = mem_req && gnt_ok;
  logic gnt_ok = 0;
  always @(posedge clk) begin
    gnt_ok <= ($urandom % 3) != 0;
    mem_rvalid <= mem_gnt;
    if (mem_gnt) begin
      if (mem_kind) mem_rpix <= MP[mem_addr[3:0]];
      else          mem_rg   <= M2[mem_addr[5:0]];
    end
  end
  // output side
  longint got [64][NG];
  int n_stall = 0, n_vec = 0, bad_gid = 0;
  bit backpressure = 1;
  always @(posedge clk) begin
    out_ready <= backpressure ? (($urandom % 4) == 0) : 1'b1;
    if (out_valid && !out_ready) n_stall++;
    if (out_valid && out_ready) begin
      n_vec++;
      for (int l = 0; l < NPIX; l++) if (out_vec[l].valid) begin
        int i;
        i = int'(out_vec[l].gid);
        if (i >= 64) bad_gid++;
        else for (int k = 0; k < NG; k++) got[i][k] += longint'(out_vec[l].g[k]);
      end
    end
  end

  longint exp_g [64][NG];
  fx_t exp_loss;
  function automatic fx_t rf(int lo, int hi);
    return fx_t'((longint'(lo + int'($urandom % (hi - lo + 1))) * 65536) / 1000);
  endfunction
  task automatic make_list(int base, int n);
    for (int k = 0; k < n; k++) begin
      gauss2d_t g;
      g.gid = gid_t'(base + k); g.mu_x = rf(-1000, 5000); g.mu_y = rf(-1000, 5000);
      g.con_a = rf(30, 600); g.con_c = rf(30, 600); g.con_b = rf(-20, 20);
      g.opac = ($urandom % 4 == 0) ? 32'sd65536 : rf(200, 900);
      for (int c = 0; c < 3; c++) g.color[c] = rf(0, 1000);
      M2[base + k] = g;
    end
    for (int p = 0; p < 16; p++) for (int c = 0; c < 3; c++) MP[p][c] = rf(0, 1000);
  endtask
  task automatic reference(int base, int n);
    exp_loss = '0;
    for (int i = 0; i < 64; i++) for (int k = 0; k < NG; k++) exp_g[i][k] = 0;
    for (int p = 0; p < 16; p++) begin
      fx_t px, py, T, al [32], w [32], dx [32], dy [32], pw, a;
      fx_t [2:0] col, ch [32], dl, S;
      int m;
      px = fx_t'((p % 4) <<< 16); py = fx_t'((p / 4) <<< 16);
      T = FX_ONE; col = '0; m = 0;
      for (int k = 0; k < n; k++) begin
        gauss2d_t g;
        g = M2[base + k];
        dx[k] = px - g.mu_x; dy[k] = py - g.mu_y;
        pw = fx_mul(FX_HALF, fx_mul(g.con_a, fx_mul(dx[k], dx[k])) + fx_mul(g.con_c, fx_mul(dy[k], dy[k])))
           + fx_mul(g.con_b, fx_mul(dx[k], dy[k]));
        a = fx_mul(g.opac, fx_exp_neg(pw));
        if (pw < 0 || a < ALPHA_MIN) a = '0; else if (a > ALPHA_MAX) a = ALPHA_MAX;
        al[k] = a; w[k] = fx_mul(T, a);
        for (int c = 0; c < 3; c++) begin ch[k][c] = fx_mul(w[k], g.color[c]); col[c] += ch[k][c]; end
        T = T - w[k]; m = k + 1;
        if (T < 32'sd7) break;
      end
      for (int c = 0; c < 3; c++) begin dl[c] = col[c] - MP[p][c]; exp_loss += fx_mul(FX_HALF, fx_mul(dl[c], dl[c])); end
      S = '0;
      for (int k = m - 1; k >= 0; k--) begin
        gauss2d_t g;
        fx_t dlda, dlp;
        int gi;
        gi = base + k; g = M2[gi];
        dlda = '0;
        for (int c = 0; c < 3; c++) dlda += fx_mul(g.color[c] - S[c], dl[c]);
        for (int c = 0; c < 3; c++) S[c] += ch[k][c];
        dlp = -fx_mul(al[k], dlda);
        exp_g[gi][G_CA]  += fx_mul(fx_mul(FX_HALF, fx_mul(dx[k], dx[k])), dlp);
        exp_g[gi][G_CB]  += fx_mul(fx_mul(dx[k], dy[k]), dlp);
        exp_g[gi][G_CC]  += fx_mul(fx_mul(FX_HALF, fx_mul(dy[k], dy[k])), dlp);
        exp_g[gi][G_MUX] += -fx_mul(fx_mul(g.con_a, dx[k]) + fx_mul(g.con_b, dy[k]), dlp);
        exp_g[gi][G_MUY] += -fx_mul(fx_mul(g.con_b, dx[k]) + fx_mul(g.con_c, dy[k]), dlp);
        for (int c = 0; c < 3; c++) exp_g[gi][G_CR+c] += fx_mul(w[k], dl[c]);
      end
    end
  endtask

  task automatic run(string name, int id, int base, int n, bit use_cfg, pair_cfg_t cfg, output pair_cfg_t cfg_o);
    int t;
    bit seenp [16];
    for (int i = 0; i < 64; i++) for (int k = 0; k < NG; k++) got[i][k] = 0;
    reference(base, n);
    check(st_ready, "ready when idle");
    st_desc = '{st_id: 16'(id), g_start: 16'(base), g_count: 8'(n), p_start: 16'(0), x0: 16'(0), y0: 16'(0)};
    st_cfg_valid = use_cfg; st_cfg = cfg; st_valid = 1;
    @(posedge clk); #0.1 st_valid = 0; st_cfg_valid = 0;
    check(!st_ready, "busy after accepting");
    t = 0;
    while (!done_valid && t < 20000) begin @(posedge clk); #0.1; t++; end
    check(done_valid, $sformatf("%s: done", name));
    check(done_st_id == 16'(id), "done id");
    check(done_loss == exp_loss, $sformatf("%s: loss %0d vs %0d", name, done_loss, exp_loss));
    cfg_o = done_cfg;
    for (int p = 0; p < 16; p++) seenp[p] = 0;
    for (int i = 0; i < NPAIR; i++) begin seenp[done_cfg[i].a] = 1; seenp[done_cfg[i].b] = 1; end
    check(seenp.and() == 1, $sformatf("%s: pairing is a permutation", name));
    // done marks the end of BP; the output queue may still be draining
    t = 0;
    while (!dut.q_empty && t < 2000) begin @(posedge clk); #0.1; t++; end
    repeat (3) @(posedge clk); #0.1;
    for (int i = base; i < base + n; i++) for (int k = 0; k < NG; k++)
      check(fx_t'(got[i][k]) == fx_t'(exp_g[i][k]), $sformatf("%s: gaussian %0d g[%0d] %0d vs %0d", name, i, k, got[i][k], exp_g[i][k]));
    $display("%s: %0d cycles", name, t);
  endtask

  initial begin
    pair_cfg_t c1, c2, c3;
    for (int i = 0; i < 64; i++) M2[i] = '0;
    for (int p = 0; p < 16; p++) MP[p] = '0;
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    make_list(0, 24);
    run("first visit", 7, 0, 24, 0, default_pairs(), c1);
    run("reused pairing", 7, 0, 24, 1, c1, c2);
    backpressure = 0;
    make_list(32, 32);
    run("second subtile", 9, 32, 32, 0, default_pairs(), c3);
    check(bad_gid == 0, "output lanes carry list Gaussians only");
    check(n_stall > 0, "BP stalled on a full output queue");
    $display("stall cycles %0d, vectors %0d", n_stall, n_vec);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #400000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
