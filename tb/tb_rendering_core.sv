// tb_rendering_core: one Rendering Core renders random pixel pairs over
// random depth-sorted lists (1..32 Gaussians, some nearly opaque so pixels
// terminate at different depths). A sequential per-pixel model using the
// same Q16.16 arithmetic gives, per fragment, alpha, T*alpha and C_hat, and
// per pixel the colour, transmittance, fragment count and whether it
// terminated early. Checks: every R&B write (pixel, k, values), the final
// per-pixel results, one completion report per pixel, that the first blend
// result appears no earlier than 1 + 12 + 3 cycles after start (alpha then
// blending latency), and that the two-units-on-one-pixel mode is exercised.
`timescale 1ns/1ps
module tb_rendering_core;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, wr_valid, busy, fin;
  logic [7:0] n_g = '0, g_idx [2], wr_k, nfrag [2];
  logic [3:0] pix [2], wr_pix, term_pix [2];
  fx_t px [2], py [2], trans [2];
  gauss2d_t g_data [2];
  rb_entry_t wr_entry;
  logic [1:0] term_valid;
  fx_t [2:0] color [2];
  rendering_core dut (.*);
  int checks = 0, failures = 0, cyc = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  always @(posedge clk) cyc <= cyc + 1;
  gauss2d_t L [32];
  always_comb for (int s = 0; s < 2; s++) g_data[s] = (g_idx[s] < 32) ? L[g_idx[s][4:0]] : '0;
  rb_entry_t RB [2][32];
  fx_t [2:0] RC [2];
  fx_t RT [2];
  int RN [2], n_term [2], n_wr [2], t0, t_first, n_dual;
  bit seen_wr [2][32];
  function automatic fx_t rf(int lo, int hi);
    return fx_t'((longint'(lo + int'($urandom % (hi - lo + 1))) * 65536) / 1000);
  endfunction
  task automatic ref_pixel(int s, int n);
    fx_t T, dx, dy, pw, a, w;
    T = FX_ONE; RC[s] = '0; RN[s] = 0;
    for (int k = 0; k < n; k++) begin
      dx = px[s] - L[k].mu_x; dy = py[s] - L[k].mu_y;
      pw = fx_mul(FX_HALF, fx_mul(L[k].con_a, fx_mul(dx, dx)) + fx_mul(L[k].con_c, fx_mul(dy, dy)))
         + fx_mul(L[k].con_b, fx_mul(dx, dy));
      a = fx_mul(L[k].opac, fx_exp_neg(pw));
      if (pw < 0 || a < ALPHA_MIN) a = '0; else if (a > ALPHA_MAX) a = ALPHA_MAX;
      w = fx_mul(T, a);
      RB[s][k].alpha = a; RB[s][k].w = w;
      for (int c = 0; c < 3; c++) begin RB[s][k].chat[c] = fx_mul(w, L[k].color[c]); RC[s][c] += RB[s][k].chat[c]; end
      T = T - w; RN[s] = k + 1;
      if (T < 32'sd7) break;
    end
    RT[s] = T;
  endtask
  always @(posedge clk) begin
    if (wr_valid) begin
      int s;
      s = (wr_pix == pix[0]) ? 0 : 1;
      check(wr_pix == pix[s], "write to a pixel of the pair");
      check(int'(wr_k) < RN[s], "write within the pixel's fragments");
      if (int'(wr_k) < RN[s]) check(wr_entry == RB[s][wr_k[4:0]], $sformatf("R&B entry pixel %0d k %0d", s, wr_k));
      check(!seen_wr[s][wr_k[4:0]], "each fragment written once");
      seen_wr[s][wr_k[4:0]] = 1; n_wr[s]++;
      if (t_first < 0) t_first = cyc - t0;
    end
    for (int b = 0; b < 2; b++) if (term_valid[b]) begin
      if (term_pix[b] == pix[0]) n_term[0]++; else if (term_pix[b] == pix[1]) n_term[1]++;
      else check(0, "completion of a foreign pixel");
    end
    if (dut.issue && dut.iss_v[1] && dut.iss_slot[0] == dut.iss_slot[1]) n_dual++;
  end
  initial begin
    n_dual = 0;
    for (int k = 0; k < 32; k++) L[k] = '0;
    pix[0] = '0; pix[1] = '0; px[0] = '0; px[1] = '0; py[0] = '0; py[1] = '0;
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int n = 0; n < 80; n++) begin
      int ng, tmo;
      ng = 1 + int'($urandom % 32);
      for (int k = 0; k < 32; k++) begin
        L[k].gid = gid_t'(k); L[k].mu_x = rf(0, 4000); L[k].mu_y = rf(0, 4000);
        L[k].con_a = rf(20, 800); L[k].con_c = rf(20, 800); L[k].con_b = rf(-20, 20);
        L[k].opac = ($urandom % 5 == 0) ? 32'sd65536 : rf(0, 900);
        for (int c = 0; c < 3; c++) L[k].color[c] = rf(0, 1000);
      end
      pix[0] = 4'($urandom); pix[1] = pix[0] ^ 4'(1 + $urandom % 15);
      for (int s = 0; s < 2; s++) begin
        px[s] = fx_t'(int'(pix[s] % 4) <<< 16); py[s] = fx_t'(int'(pix[s] / 4) <<< 16);
        ref_pixel(s, ng);
        n_term[s] = 0; n_wr[s] = 0;
        for (int k = 0; k < 32; k++) seen_wr[s][k] = 0;
      end
      n_g = 8'(ng);
      t0 = cyc + 1; t_first = -1;
      start = 1; @(posedge clk); #0.1 start = 0;
      tmo = 0;
      while (!fin && tmo < 2000) begin @(posedge clk); #0.1; tmo++; end
      check(fin, "fin");
      check(t_first >= 1 + 12 + 3, $sformatf("first blend after %0d cycles", t_first));
      for (int s = 0; s < 2; s++) begin
        check(color[s] == RC[s] && trans[s] == RT[s], $sformatf("pixel %0d colour / T", s));
        check(int'(nfrag[s]) == RN[s] && n_wr[s] == RN[s], $sformatf("pixel %0d fragments %0d/%0d vs %0d", s, nfrag[s], n_wr[s], RN[s]));
      end
      repeat (3) @(posedge clk); #0.1;
      for (int s = 0; s < 2; s++)
        check(n_term[s] == 1, $sformatf("pixel %0d completion reported once (%0d)", s, n_term[s]));
    end
    check(n_dual > 0, "both alpha units on one pixel");
    $display("dual-unit rounds %0d", n_dual);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #1000000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
