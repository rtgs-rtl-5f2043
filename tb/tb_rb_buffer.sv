// tb_rb_buffer: random writes on the 8 write ports (each to one of its two
// lanes) and random reads on all 16 lane read ports, against an array model.
// Reads are combinational and see writes from the previous edge.
`timescale 1ns/1ps
module tb_rb_buffer;
  import rtgs_pkg::*;
  logic clk = 0;
  always #1 clk = ~clk;
  logic wr_valid [8], wr_slot [8];
    logic [7:0] wr_k [8], rd_k [16];
  rb_entry_t wr_data [8], rd_data [16];
  rb_buffer dut (.*);
  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  rb_entry_t m [16][32];
  bit        mv [16][32];
  initial begin
    for (int i = 0; i < 8; i++) begin wr_valid[i] = 0; wr_slot[i] = 0; wr_k[i] = '0; wr_data[i] = '0; end
    for (int i = 0; i < 16; i++) begin rd_k[i] = '0; for (int k = 0; k < 32; k++) mv[i][k] = 0; end
    @(posedge clk); #0.1;
    for (int n = 0; n < 1000; n++) begin
      for (int i = 0; i < 8; i++) begin
        wr_valid[i] = $urandom % 2;
        wr_slot[i] = $urandom % 2;
        wr_k[i] = 8'($urandom % 32);
        wr_data[i] = '{chat: '{fx_t'($urandom), fx_t'($urandom), fx_t'($urandom)},
                       alpha: fx_t'($urandom), w: fx_t'($urandom)};
      end
      for (int i = 0; i < 16; i++) rd_k[i] = 8'($urandom % 32);
      #0.2;
      for (int i = 0; i < 16; i++)
        if (mv[i][rd_k[i]]) check(rd_data[i] == m[i][rd_k[i]], $sformatf("read port %0d", i));
      @(posedge clk); #0.1;
      for (int i = 0; i < 8; i++) if (wr_valid[i]) begin
        m[2*i+wr_slot[i]][wr_k[i]] = wr_data[i]; mv[2*i+wr_slot[i]][wr_k[i]] = 1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; $display("FAIL: watchdog"); failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
