// tb_gaussian_cache: fills part of every array through the host port, checks
// the combinational 3D and subtile reads, then lets the 16 RE ports issue
// random read requests at once: every request must be granted (at most one
// per cycle, each waiting RE within 16 cycles) and its data must arrive on
// the next cycle with re_rvalid.
`timescale 1ns/1ps
module tb_gaussian_cache;
  import rtgs_pkg::*;
  logic clk = 0, rst_n = 0;
  always #1 clk = ~clk;
  logic hw_valid = 0;
  logic [1:0] hw_sel = 0;
  logic [15:0] hw_addr = 0;
  gauss2d_t hw_g2d = '0;
  fx_t [2:0] hw_pix = '0;
  gauss3d_t hw_g3d = '0;
  subtile_t hw_st = '0;
  logic re_req [16], re_kind [16], re_gnt [16], re_rvalid [16];
  logic [15:0] re_addr [16];
  gauss2d_t rd_g;
  fx_t [2:0] rd_pix;
  gid_t r3_addr = '0;
  gauss3d_t r3_data;
  logic [15:0] st_addr = '0;
  subtile_t st_data;
  gaussian_cache dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  localparam int NA = 64;
  gauss2d_t M2 [NA]; fx_t [2:0] MP [NA]; gauss3d_t M3 [NA]; subtile_t MS [NA];
  int wait_c [16];
  logic last_g [16];
  logic [15:0] last_a [16];
  logic last_k [16];
  initial begin
    for (int i = 0; i < 16; i++) begin re_req[i] = 0; re_kind[i] = 0; re_addr[i] = '0; wait_c[i] = 0; end
    repeat (2) @(posedge clk); #0.1 rst_n = 1;
    for (int a = 0; a < NA; a++) begin
      M2[a] = '{gid: gid_t'($urandom), mu_x: fx_t'($urandom), mu_y: fx_t'($urandom), con_a: fx_t'($urandom),
                con_b: fx_t'($urandom), con_c: fx_t'($urandom), opac: fx_t'($urandom),
                color: '{fx_t'($urandom), fx_t'($urandom), fx_t'($urandom)}};
      MP[a] = '{fx_t'($urandom), fx_t'($urandom), fx_t'($urandom)};
      M3[a] = '{pw: '{fx_t'($urandom), fx_t'($urandom), fx_t'($urandom)},
                pc: '{fx_t'($urandom), fx_t'($urandom), fx_t'($urandom)}, inv_z: fx_t'($urandom)};
      MS[a] = '{st_id: 16'($urandom), g_start: 16'($urandom), g_count: 8'($urandom),
                p_start: 16'($urandom), x0: 16'($urandom), y0: 16'($urandom)};
      hw_addr = 16'(a); hw_valid = 1;
      hw_sel = 0; hw_g2d = M2[a]; @(posedge clk); #0.1;
      hw_sel = 1; hw_pix = MP[a]; @(posedge clk); #0.1;
      hw_sel = 2; hw_g3d = M3[a]; @(posedge clk); #0.1;
      hw_sel = 3; hw_st = MS[a]; @(posedge clk); #0.1;
      hw_valid = 0;
    end
    for (int a = 0; a < NA; a++) begin
      r3_addr = gid_t'(a); st_addr = 16'(a); #0.2;
      check(r3_data == M3[a], "3D read");
      check(st_data == MS[a], "subtile read");
    end
    for (int n = 0; n < 3000; n++) begin
      int ng;
      for (int i = 0; i < 16; i++)
        if (!re_req[i] && ($urandom % 3) == 0) begin
          re_req[i] = 1; re_kind[i] = $urandom % 2; re_addr[i] = 16'($urandom % NA); wait_c[i] = 0;
        end
      #0.2;
      ng = 0;
      for (int i = 0; i < 16; i++) begin
        last_g[i] = re_req[i] && re_gnt[i]; last_a[i] = re_addr[i]; last_k[i] = re_kind[i];
        if (last_g[i]) ng++;
        check(!(re_gnt[i] && !re_req[i]), "grant without request");
      end
      check(ng == (re_req.or() ? 1 : 0), "one grant per cycle while requests wait");
      @(posedge clk); #0.1;
      for (int i = 0; i < 16; i++) begin
        check(re_rvalid[i] == last_g[i], "rvalid one cycle after grant");
        if (last_g[i]) begin
          if (last_k[i]) check(rd_pix == MP[last_a[i]], "pixel data");
          else           check(rd_g == M2[last_a[i]], "2D Gaussian data");
          re_req[i] = 0;
        end else if (re_req[i]) begin
          wait_c[i]++;
          check(wait_c[i] < 16, "round-robin: no RE waits 16 cycles");
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
