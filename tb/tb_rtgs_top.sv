// tb_rtgs_top: end-to-end test of the plug-in at its default configuration
// (16 REs, 4 GMUs, 16 PEs, full buffer sizes).
//
// A small synthetic scene (NG2 2D Gaussians over a 20x16-pixel image, 20
// subtiles, so the 16 REs must stream) is generated with $urandom, sorted by
// depth per subtile and written into the Gaussian cache the way the GPU
// would. Three iterations run through the full host handshake:
//   1. frame 1, tracking   (first visit: default pixel pairs)
//   2. frame 1, tracking   (pairings reused from iteration 1)
//   3. frame 2, mapping    (keyframe: no pruning wait, Gaussian updates)
// A behavioural reference renders every pixel sequentially, backpropagates
// it, sums the gradients per Gaussian and applies the same projection
// Jacobian; it shares only the package's fixed-point multiply and exp.
// Checked: iteration loss (exact), per-Gaussian 3D gradients and dL/dP
// (within a small tolerance, since a Gaussian split by a Stage Buffer
// conflict is projected in two parts), the pose step, status and flags.
// Mechanisms counted (each must occur): early termination, two alpha units
// on one pixel, WSU pairing reuse, subtile streaming, GMU merging, Stage
// Buffer accumulation and conflict eviction, BP stall on a full output queue,
// mapping updates.
`timescale 1ns/1ps
module tb_rtgs_top;
  import rtgs_pkg::*;

  localparam int NST_T = 20;
  localparam int NG2   = 40;
  localparam int NRE_T = 16;

  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;

  logic        hw_valid = 0;
  logic [1:0]  hw_sel = 0;
  logic [15:0] hw_addr = 0;
  gauss2d_t    hw_g2d = '0;
  fx_t [2:0]   hw_pix = '0;
  gauss3d_t    hw_g3d = '0;
  subtile_t    hw_st = '0;
  fx_t         cam_fx, cam_fy;
  fx_t [8:0]   cam_R;
  logic        pose_load = 0;
  pose6_t      pose_init = '0;
  logic        exec = 0, is_keyframe = 0, input_done = 0, pruning_done = 0;
  logic [15:0] frame_id = 0;
  logic [15:0] n_subtiles = NST_T;
  logic        gradient_ready;
  status_e     status;
  pose6_t      pose, dldp;
  fx_t         iter_loss;
  logic        go_valid, go_upd, go_ready;
  grad3d_t     go_data;

  rtgs_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- scene ----------------
  gauss2d_t  G    [NG2];
  gauss3d_t  G3   [NG2];
  int        dep  [NG2];
  fx_t [2:0] GT   [NST_T*16];
  int        lst  [NST_T][$];
  int        gstart [NST_T];

  function automatic fx_t rf(int lo_milli, int hi_milli);
    int v;
    v = lo_milli + int'($urandom % (hi_milli - lo_milli + 1));
    return fx_t'((longint'(v) * 65536) / 1000);
  endfunction

  task automatic build_scene();
    for (int i = 0; i < NG2; i++) begin
      G[i].gid   = (i == 7) ? gid_t'(515) : ((i == 3) ? gid_t'(3) : gid_t'(i * 11 + 20));
      G[i].mu_x  = rf(0, 20000);
      G[i].mu_y  = rf(0, 16000);
      G[i].con_a = rf(50, 400);
      G[i].con_c = rf(50, 400);
      G[i].con_b = rf(-20, 20);
      G[i].opac  = rf(300, 900);
      for (int c = 0; c < 3; c++) G[i].color[c] = rf(0, 1000);
      dep[i] = int'($urandom % 1000);
      if (i < 4) begin            // broad, nearly opaque layers: early termination
        G[i].con_a = rf(2, 4); G[i].con_c = rf(2, 4); G[i].con_b = '0;
        G[i].opac  = 32'sd65536;
        dep[i]     = 400 + i;
      end
      G3[i].pc[0] = rf(-1000, 1000);
      G3[i].pc[1] = rf(-1000, 1000);
      G3[i].pc[2] = rf(2000, 5000);
      G3[i].inv_z = fx_t'((64'sd1 << 32) / 64'(G3[i].pc[2]));
      for (int c = 0; c < 3; c++) G3[i].pw[c] = rf(-3000, 3000);
    end
    for (int s = 0; s < NST_T; s++) begin
      int cx, cy;
      cx = 4 * (s % 5) + 2; cy = 4 * (s / 5) + 2;
      lst[s].delete();
      for (int i = 0; i < NG2; i++) begin
        int dx, dy;
        dx = int'(G[i].mu_x >>> 16) - cx; dy = int'(G[i].mu_y >>> 16) - cy;
        if (i < 4 || (dx*dx + dy*dy) < 49) lst[s].push_back(i);
      end
      lst[s].sort() with (dep[item]);
      while (lst[s].size() > 32) void'(lst[s].pop_back());
      for (int p = 0; p < 16; p++) for (int c = 0; c < 3; c++) GT[s*16+p][c] = rf(0, 1000);
    end
  endtask

  task automatic hwrite(logic [1:0] sel, int addr);
    hw_sel = sel; hw_addr = 16'(addr); hw_valid = 1;
    @(posedge clk); #0.1;
    hw_valid = 0;
  endtask

  task automatic load_cache();
    int a;
    a = 0;
    for (int s = 0; s < NST_T; s++) begin
      gstart[s] = a;
      foreach (lst[s][k]) begin hw_g2d = G[lst[s][k]]; hwrite(2'd0, a); a++; end
      for (int p = 0; p < 16; p++) begin hw_pix = GT[s*16+p]; hwrite(2'd1, s*16+p); end
      hw_st = '{st_id: 16'(s), g_start: 16'(gstart[s]), g_count: 8'(lst[s].size()),
                p_start: 16'(s*16), x0: 16'(4*(s%5)), y0: 16'(4*(s/5))};
      hwrite(2'd3, s);
    end
    for (int i = 0; i < NG2; i++) begin hw_g3d = G3[i]; hwrite(2'd2, int'(G[i].gid)); end
  endtask

  // ---------------- reference ----------------
  fx_t [NG-1:0] R2 [NG2];
  logic         seen [NG2];
  fx_t          ref_loss;
  pose6_t       ref_dldp;
  fx_t [2:0]    ref_dmu [NG2];
  int           ref_term;

  function automatic int idx_of(gid_t g);
    for (int i = 0; i < NG2; i++) if (G[i].gid == g) return i;
    return -1;
  endfunction

  task automatic reference();
    ref_loss = '0; ref_term = 0;
    for (int i = 0; i < NG2; i++) begin R2[i] = '0; seen[i] = 0; end
    for (int s = 0; s < NST_T; s++)
      for (int p = 0; p < 16; p++) begin
        fx_t px, py, T, al [32], w [32], dx [32], dy [32], pw_, ap;
        fx_t [2:0] col, ch [32], dl, S;
        int n;
        px = fx_t'((4*(s%5) + p%4) <<< 16);
        py = fx_t'((4*(s/5) + p/4) <<< 16);
        T = FX_ONE; col = '0; n = 0;
        foreach (lst[s][k]) begin
          gauss2d_t g;
          g = G[lst[s][k]];
          dx[k] = px - g.mu_x; dy[k] = py - g.mu_y;
          pw_ = fx_mul(FX_HALF, fx_mul(g.con_a, fx_mul(dx[k], dx[k])) + fx_mul(g.con_c, fx_mul(dy[k], dy[k])))
              + fx_mul(g.con_b, fx_mul(dx[k], dy[k]));
          ap = fx_mul(g.opac, fx_exp_neg(pw_));
          if (pw_ < 0 || ap < ALPHA_MIN) ap = '0;
          else if (ap > ALPHA_MAX) ap = ALPHA_MAX;
          al[k] = ap;
          w[k]  = fx_mul(T, ap);
          for (int c = 0; c < 3; c++) begin ch[k][c] = fx_mul(w[k], g.color[c]); col[c] += ch[k][c]; end
          T = T - w[k];
          n = k + 1;
          if (T < 32'sd7) begin
            if (k < lst[s].size() - 1) ref_term++;
            break;
          end
        end
        for (int c = 0; c < 3; c++) begin
          dl[c] = col[c] - GT[s*16+p][c];
          ref_loss += fx_mul(FX_HALF, fx_mul(dl[c], dl[c]));
        end
        S = '0;
        for (int k = n - 1; k >= 0; k--) begin
          gauss2d_t g;
          fx_t dlda, dlp;
          int gi;
          gi = lst[s][k]; g = G[gi];
          dlda = '0;
          for (int c = 0; c < 3; c++) dlda += fx_mul(g.color[c] - S[c], dl[c]);
          for (int c = 0; c < 3; c++) S[c] += ch[k][c];
          dlp = -fx_mul(al[k], dlda);
          R2[gi][G_CA]  += fx_mul(fx_mul(FX_HALF, fx_mul(dx[k], dx[k])), dlp);
          R2[gi][G_CB]  += fx_mul(fx_mul(dx[k], dy[k]), dlp);
          R2[gi][G_CC]  += fx_mul(fx_mul(FX_HALF, fx_mul(dy[k], dy[k])), dlp);
          R2[gi][G_MUX] += -fx_mul(fx_mul(g.con_a, dx[k]) + fx_mul(g.con_b, dy[k]), dlp);
          R2[gi][G_MUY] += -fx_mul(fx_mul(g.con_b, dx[k]) + fx_mul(g.con_c, dy[k]), dlp);
          for (int c = 0; c < 3; c++) R2[gi][G_CR+c] += fx_mul(w[k], dl[c]);
          seen[gi] = 1;
        end
      end
    // preprocessing BP in real arithmetic
    ref_dldp = '0;
    begin
      real pd [6];
      for (int c = 0; c < 6; c++) pd[c] = 0.0;
      for (int i = 0; i < NG2; i++) begin
        real x, y, z, gu, gv, g [3], f;
        ref_dmu[i] = '0;
        if (!seen[i]) continue;
        f  = real'(cam_fx) / 65536.0;
        x  = real'(G3[i].pc[0]) / 65536.0; y = real'(G3[i].pc[1]) / 65536.0; z = real'(G3[i].pc[2]) / 65536.0;
        gu = real'(R2[i][G_MUX]) / 65536.0; gv = real'(R2[i][G_MUY]) / 65536.0;
        g[0] = f / z * gu; g[1] = f / z * gv; g[2] = -(f * x * gu + f * y * gv) / (z * z);
        for (int c = 0; c < 3; c++)
          ref_dmu[i][c] = fx_t'($rtoi(65536.0 * (real'(cam_R[c]) * g[0] + real'(cam_R[3+c]) * g[1]
                                                  + real'(cam_R[6+c]) * g[2]) / 65536.0));
        for (int c = 0; c < 3; c++) pd[c] += g[c];
        pd[3] += y * g[2] - z * g[1];
        pd[4] += z * g[0] - x * g[2];
        pd[5] += x * g[1] - y * g[0];
      end
      for (int c = 0; c < 6; c++) ref_dldp[c] = fx_t'($rtoi(pd[c] * 65536.0));
    end
  endtask

  // ---------------- output stream capture ----------------
  fx_t [2:0] got_dmu [NG2];
  int        got_rec, got_upd, got_bad;
  assign go_ready = 1'b1;
  always @(posedge clk) if (go_valid && go_ready) begin
    int i;
    i = idx_of(go_data.gid);
    got_rec++;
    if (go_upd) got_upd++;
    if (i < 0) got_bad++;
    else for (int c = 0; c < 3; c++) got_dmu[i][c] += go_data.dmu[c];
  end

  // ---------------- mechanism counters ----------------
  int n_term, n_dual, n_cfg_hit, n_stream, n_merge, n_sb_hit, n_conflict, n_stall;
  int re_jobs [NRE_T];
  for (genvar i = 0; i < NRE_T; i++) begin : g_cnt
    always @(posedge clk) begin
      if (dut.re_valid[i]) begin
        if (re_jobs[i] > 0) n_stream++;
        re_jobs[i]++;
      end
      if (dut.g_re[i].u_re.state == 3'd5 && !dut.g_re[i].u_re.room) n_stall++;
    end
    for (genvar j = 0; j < NPAIR; j++) begin : g_rc
      always @(posedge clk) begin
        if (dut.g_re[i].u_re.g_rc[j].u_rc.b_ov && dut.g_re[i].u_re.g_rc[j].u_rc.b_term) n_term++;
        if (dut.g_re[i].u_re.g_rc[j].u_rc.issue && dut.g_re[i].u_re.g_rc[j].u_rc.iss_v[1] &&
            dut.g_re[i].u_re.g_rc[j].u_rc.iss_slot[0] == dut.g_re[i].u_re.g_rc[j].u_rc.iss_slot[1]) n_dual++;
      end
    end
  end
  for (genvar m = 0; m < 4; m++) begin : g_mc
    always @(posedge clk)
      if (dut.g_gmu[m].u_gmu.v[1])
        for (int l = 0; l < NPIX; l++)
          if (dut.g_gmu[m].u_gmu.d[1][l].valid && !dut.g_gmu[m].u_gmu.hd[1][l]) n_merge++;
  end
  always @(posedge clk) begin
    if (dut.u_disp.cfg_hit) n_cfg_hit++;
    if (dut.u_sb.ev_conflict) n_conflict++;
    if (dut.u_sb.proc && dut.u_sb.hit) n_sb_hit++;
  end

  // ---------------- one iteration through the handshake ----------------
  task automatic iteration(int fid, bit key, int it);
    int t0, t1;
    bit saw_wait;
    pose6_t pose_before;
    for (int i = 0; i < NG2; i++) got_dmu[i] = '0;
    for (int i = 0; i < NRE_T; i++) re_jobs[i] = 0;
    got_rec = 0; got_upd = 0; got_bad = 0;
    pose_before = pose;
    frame_id = 16'(fid); is_keyframe = key; exec = 1;
    @(posedge clk); #0.1; exec = 0;
    repeat (3) @(posedge clk);
    check(status == ST_EXECUTING, $sformatf("it%0d status EXECUTING while polling", it));
    #0.1 input_done = 1;
    t0 = $time;
    saw_wait = 0;
    while (status != ST_IDLE) begin
      @(posedge clk); #0.1;
      if (gradient_ready && !saw_wait) begin
        saw_wait = 1;
        check(status == ST_WAIT_PRUNING, $sformatf("it%0d WAIT_PRUNING with gradient_ready", it));
        check(!key, $sformatf("it%0d gradient_ready only for non-keyframes", it));
        repeat (5) @(posedge clk);
        #0.1 pruning_done = 1;
        @(posedge clk); #0.1 pruning_done = 0;
      end
    end
    t1 = $time;
    input_done = 0;
    repeat (4) @(posedge clk);
    $display("iteration %0d: %0d cycles, %0d gradient records", it, (t1 - t0) / 2, got_rec);
    check(saw_wait == !key, $sformatf("it%0d pruning handshake presence", it));
    check(iter_loss == ref_loss, $sformatf("it%0d loss %0d vs %0d", it, iter_loss, ref_loss));
    check(got_bad == 0, $sformatf("it%0d unknown gid in stream", it));
    check(key ? (got_upd == got_rec) : (got_upd == 0), $sformatf("it%0d update flags", it));
    for (int i = 0; i < NG2; i++)
      for (int c = 0; c < 3; c++) begin
        longint e;
        e = longint'(got_dmu[i][c]) - longint'(ref_dmu[i][c]);
        if (e < 0) e = -e;
        check(e <= 64 + (longint'(ref_dmu[i][c]) < 0 ? -longint'(ref_dmu[i][c]) : longint'(ref_dmu[i][c])) / 256,
              $sformatf("it%0d dmu g%0d c%0d %0d vs %0d", it, i, c, got_dmu[i][c], ref_dmu[i][c]));
      end
    if (!key) begin
      for (int c = 0; c < 6; c++) begin
        longint e, r;
        r = longint'(ref_dldp[c]); if (r < 0) r = -r;
        e = longint'(dldp[c]) - longint'(ref_dldp[c]); if (e < 0) e = -e;
        check(e <= 256 + r / 128, $sformatf("it%0d dL/dP[%0d] %0d vs %0d", it, c, dldp[c], ref_dldp[c]));
        check(pose[c] == pose_before[c] - (dldp[c] >>> 8), $sformatf("it%0d pose step %0d", it, c));
      end
    end else begin
      for (int c = 0; c < 6; c++) check(pose[c] == pose_before[c], "mapping leaves pose");
    end
  endtask

  initial begin
    cam_fx = 32'sd1310720; cam_fy = 32'sd1310720;    // 20 px per unit
    cam_R  = '{32'sd65536, 32'sd0, 32'sd0, 32'sd0, 32'sd65209, -32'sd6543, 32'sd0, 32'sd6543, 32'sd65209};
    build_scene();
    repeat (3) @(posedge clk);
    #0.1 rst_n = 1;
    load_cache();
    pose_init = '{32'sd100, -32'sd200, 32'sd300, 32'sd0, 32'sd50, -32'sd50};
    pose_load = 1; @(posedge clk); #0.1 pose_load = 0;
    check(status == ST_IDLE, "idle after reset");
    reference();
    $display("reference: %0d early terminations, loss %0d", ref_term, ref_loss);
    iteration(1, 0, 1);
    iteration(1, 0, 2);
    iteration(2, 1, 3);
    $display("mechanisms: term=%0d dual=%0d cfg_hit=%0d stream=%0d merge=%0d sb_hit=%0d conflict=%0d stall=%0d",
             n_term, n_dual, n_cfg_hit, n_stream, n_merge, n_sb_hit, n_conflict, n_stall);
    check(n_term > 0, "early termination happened");
    check(n_dual > 0, "both alpha units on one pixel happened");
    check(n_cfg_hit == NST_T, "WSU pairing reused in iteration 2 only");
    check(n_stream > 0, "an RE took a second subtile");
    check(n_merge > 0, "GMU merged gradients");
    check(n_sb_hit > 0, "Stage Buffer accumulated");
    check(n_conflict > 0, "Stage Buffer conflict eviction");
    check(n_stall > 0, "BP stalled on a full output queue");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
