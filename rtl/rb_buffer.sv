// rb_buffer: Rendering & Backpropagation (R&B) Buffer of a Rendering Engine.
//
// Keeps, for every pixel of the subtile and every fragment k it blended, the
// values rendering already computed and rendering BP needs again:
// C_hat_{P,k} = T alpha C_k, alpha_{P,k} and T alpha. With them the alpha
// gradient needs no division to recover T (the reuse the paper introduces).
// Organisation: one bank per pixel lane, MAX_G entries per bank. Lane 2w+s
// is slot s of pixel pair w: Rendering Core w writes it (write port w, slot
// wr_slot) and Rendering BP Core w reads it (read port 2w+s). The pairing is
// fixed for a subtile, so a lane always holds the same pixel and no pixel
// crossbar is needed; each bank is a plain one-write, one-read memory.
// Reads are combinational, writes take effect at the clock edge. This buffer holds a whole subtile; the paper's
// chunked, double-buffered streaming of C_hat through the Gaussian Cache is
// not modelled.
module rb_buffer import rtgs_pkg::*; #(
  parameter int MAX_G = 32,
  parameter int NW    = NPAIR,
  parameter int K_W   = 8
) (
  input  logic             clk,
  input  logic             wr_valid [NW],
  input  logic             wr_slot  [NW],
  input  logic [K_W-1:0]   wr_k     [NW],
  input  rb_entry_t        wr_data  [NW],
  input  logic [K_W-1:0]   rd_k     [2*NW],
  output rb_entry_t        rd_data  [2*NW]
);
  localparam int AW = $clog2(MAX_G);

  for (genvar w = 0; w < NW; w++) begin : g_pair
    for (genvar s = 0; s < 2; s++) begin : g_slot
      rb_entry_t bank [MAX_G];
      logic      we;
      assign we = wr_valid[w] && (wr_slot[w] == 1'(s)) && (wr_k[w] < K_W'(MAX_G));
      always_ff @(posedge clk)
        if (we) bank[wr_k[w][AW-1:0]] <= wr_data[w];
      assign rd_data[2*w+s] = (rd_k[2*w+s] < K_W'(MAX_G)) ? bank[rd_k[2*w+s][AW-1:0]] : '0;
    end
  end
endmodule
