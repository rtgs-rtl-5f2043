// tb_subtile_dispatcher: 16 modelled REs that take a random time per
// subtile. Three passes over 40 subtiles: every subtile must go out exactly
// once, to the lowest-numbered free RE, with the descriptor at its index;
// pass 1 must carry no stored pairing, pass 2 the pairing each subtile
// returned in pass 1 (cfg_hit for every one), and pass 3, after clr_cfg,
// none again. done must pulse once per pass after the last completion.
`timescale 1ns/1ps
module tb_subtile_dispatcher;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, clr_cfg = 0, done, cfg_hit, busy, re_cfg_valid;
  logic [15:0] n_st = 16'd40, st_addr;
  subtile_t st_data, re_desc;
  logic re_ready [16], re_valid [16], re_done [16];
  logic [15:0] re_done_id [16];
  pair_cfg_t re_done_cfg [16], re_cfg;
  subtile_dispatcher dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  subtile_t MS [64];
  pair_cfg_t stored [64];
  bit has [64];
  int busy_t [16], sent [64], n_done, n_hit;
  logic [15:0] cur [16];
  always_comb st_data = MS[st_addr[5:0]];
  always_comb for (int i = 0; i < 16; i++) re_ready[i] = (busy_t[i] == 0);
  always @(posedge clk) begin
    int first;
    if (done) n_done++;
    if (cfg_hit) n_hit++;
    first = -1;
    for (int i = 15; i >= 0; i--) if (re_ready[i]) first = i;
    for (int i = 0; i < 16; i++) begin
      re_done[i] <= 1'b0;
      if (re_valid[i]) begin
        int id;
        id = int'(re_desc.st_id);
        check(re_ready[i], "dispatch to a free RE");
        check(i == first, "lowest-numbered free RE");
        check(re_desc == MS[id], "descriptor");
        check(re_cfg_valid == has[id], "stored pairing flag");
        if (has[id]) check(re_cfg == stored[id], "stored pairing");
        sent[id]++;
        cur[i] <= 16'(id);
        busy_t[i] <= 3 + int'($urandom % 40);
      end else if (busy_t[i] > 1) busy_t[i] <= busy_t[i] - 1;
      else if (busy_t[i] == 1) begin
        pair_cfg_t c;
        for (int k = 0; k < NPAIR; k++) begin c[k].a = 4'($urandom); c[k].b = 4'($urandom); end
        re_done[i] <= 1'b1; re_done_id[i] <= cur[i]; re_done_cfg[i] <= c;
        stored[cur[i]] = c; has[cur[i]] = 1;
        busy_t[i] <= 0;
      end
    end
  end
  task automatic pass(string name, bit expect_hits);
    int t;
    for (int s = 0; s < 64; s++) sent[s] = 0;
    n_done = 0; n_hit = 0;
    if (!expect_hits) for (int s = 0; s < 64; s++) has[s] = 0;
    start = 1; @(posedge clk); #0.1 start = 0;
    t = 0;
    while (n_done == 0 && t < 5000) begin @(posedge clk); #0.1; t++; end
    repeat (5) @(posedge clk); #0.1;
    for (int s = 0; s < 40; s++) check(sent[s] == 1, $sformatf("%s: subtile %0d sent once", name, s));
    for (int i = 0; i < 16; i++) check(busy_t[i] == 0, $sformatf("%s: RE %0d finished before done", name, i));
    check(n_done == 1, $sformatf("%s: one done pulse", name));
    check(n_hit == (expect_hits ? 40 : 0), $sformatf("%s: %0d pairing reuses", name, n_hit));
    check(!busy, "idle after done");
  endtask
  initial begin
    for (int i = 0; i < 16; i++) begin busy_t[i] = 0; re_done_id[i] = '0; re_done_cfg[i] = '0; re_done[i] = 0; cur[i] = '0; end
    for (int s = 0; s < 64; s++) begin
      MS[s] = '{st_id: 16'(s), g_start: 16'($urandom), g_count: 8'($urandom), p_start: 16'($urandom),
                x0: 16'($urandom), y0: 16'($urandom)};
      has[s] = 0; stored[s] = '0;
    end
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    pass("first visit", 0);
    pass("reuse", 1);
    clr_cfg = 1; @(posedge clk); #0.1 clr_cfg = 0;
    pass("after new frame", 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #200000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
