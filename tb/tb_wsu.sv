// tb_wsu: for each of many subtiles, starts the WSU with either a stored
// pairing or none (then the default pairs (2i, 2i+1) must appear), reports
// the 16 pixel completions in a random order spread over random cycles and
// RCs, and checks that the new pairing is (i-th lightest, i-th heaviest) for
// i = 0..7, valid 8 clock edges after the edge that records the 16th
// completion (one pop per cycle).
`timescale 1ns/1ps
module tb_wsu;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic start = 0, cfg_in_valid = 0, cfg_out_valid;
  pair_cfg_t cfg_in = '0, pairs, cfg_out;
  logic [1:0] term_valid [NPAIR];
  logic [PIX_W-1:0] term_pix [NPAIR][2];
  wsu dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  initial begin
    for (int i = 0; i < NPAIR; i++) begin term_valid[i] = '0; term_pix[i][0] = '0; term_pix[i][1] = '0; end
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int n = 0; n < 60; n++) begin
      int ord [16];
      int sent, t_last, t_out;
      for (int p = 0; p < 16; p++) ord[p] = p;
      ord.shuffle();
      cfg_in_valid = n % 2;
      for (int i = 0; i < NPAIR; i++) begin cfg_in[i].a = 4'($urandom); cfg_in[i].b = 4'($urandom); end
      start = 1;
      @(posedge clk); #0.1 start = 0;
      for (int i = 0; i < NPAIR; i++)
        if (cfg_in_valid) check(pairs[i] == cfg_in[i], "stored pairing applied");
        else check(pairs[i].a == 4'(2 * i) && pairs[i].b == 4'(2 * i + 1), "default pairing");
      cfg_in_valid = 0;
      sent = 0;
      while (sent < 16) begin
        int k, rc;
        k = int'($urandom % 4);
        rc = 0;
        for (int j = 0; j < k && sent < 16; j++) begin
          rc += int'($urandom % 2);
          if (rc >= NPAIR) break;
          begin
            int b;
            b = int'($urandom % 2);
            if (term_valid[rc][b]) b = 1 - b;
            if (term_valid[rc][b]) begin rc++; continue; end
            term_valid[rc][b] = 1; term_pix[rc][b] = 4'(ord[sent]);
            // two completions in one RC: slot 0 counts first
            if (b == 0 && term_valid[rc][1]) begin
              term_pix[rc][0] = term_pix[rc][1]; term_pix[rc][1] = 4'(ord[sent]);
            end
            sent++;
          end
        end
        @(posedge clk); #0.1;
        for (int i = 0; i < NPAIR; i++) term_valid[i] = '0;
      end
      t_last = 0; t_out = -1;
      for (int c = 1; c <= 12; c++) begin
        if (cfg_out_valid && t_out < 0) t_out = c;
        @(posedge clk); #0.1;
      end
      check(t_out - 1 == 8, $sformatf("configuration ready %0d edges after the last completion", t_out - 1));
      for (int i = 0; i < NPAIR; i++)
        check(cfg_out[i].a == 4'(ord[i]) && cfg_out[i].b == 4'(ord[15 - i]), $sformatf("pair %0d", i));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
