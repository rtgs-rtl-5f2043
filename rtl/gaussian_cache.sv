// gaussian_cache: Gaussian Sharing Cache.
//
// The on-chip store the GPU fills after preprocessing and sorting and the
// plug-in reads: sorted 2D Gaussian lists (one per subtile, in depth order),
// ground-truth pixel colours, the 3D data of each Gaussian and the subtile
// descriptors. Host writes go through one port (hw_sel chooses the array).
// The Rendering Engines share one read port through a round-robin arbiter:
// re_req[i] is granted by re_gnt[i], and the data arrive with re_rvalid[i]
// on the next cycle (rd_g / rd_pix, shared by all REs). The 3D data and the
// subtile descriptors have combinational read ports for the Stage Buffer's
// eviction path and the dispatcher.
// Sizes: 1024 2D Gaussians (38 B), 1024 pixels (12 B) and 1024 3D entries
// (28 B) make 78 KB against the paper's 80 KB; the split is this design's.
// Refill from the L2 cache and the write-back of C_hat are not modelled, so
// one call works on what fits here.
module gaussian_cache import rtgs_pkg::*; #(
  parameter int NRE = 16,
  parameter int N2D = 1024,
  parameter int NPM = 1024,
  parameter int N3D = 1024,
  parameter int NST = 64
) (
  input  logic        clk,
  input  logic        rst_n,
  // host (GPU) write port
  input  logic        hw_valid,
  input  logic [1:0]  hw_sel,       // 0: 2D Gaussian, 1: pixel, 2: 3D data, 3: subtile
  input  logic [15:0] hw_addr,
  input  gauss2d_t    hw_g2d,
  input  fx_t [2:0]   hw_pix,
  input  gauss3d_t    hw_g3d,
  input  subtile_t    hw_st,
  // RE read port
  input  logic        re_req  [NRE],
  input  logic        re_kind [NRE],
  input  logic [15:0] re_addr [NRE],
  output logic        re_gnt  [NRE],
  output logic        re_rvalid [NRE],
  output gauss2d_t    rd_g,
  output fx_t [2:0]   rd_pix,
  // 3D data and descriptor reads
  input  gid_t        r3_addr,
  output gauss3d_t    r3_data,
  input  logic [15:0] st_addr,
  output subtile_t    st_data
);
  localparam int SW = $clog2(NRE) > 0 ? $clog2(NRE) : 1;

  gauss2d_t  m2d [N2D];
  fx_t [2:0] mpx [NPM];
  gauss3d_t  m3d [N3D];
  subtile_t  mst [NST];

  always_ff @(posedge clk) begin
    if (hw_valid) begin
      case (hw_sel)
        2'd0: if (32'(hw_addr) < N2D) m2d[hw_addr[$clog2(N2D)-1:0]] <= hw_g2d;
        2'd1: if (32'(hw_addr) < NPM) mpx[hw_addr[$clog2(NPM)-1:0]] <= hw_pix;
        2'd2: if (32'(hw_addr) < N3D) m3d[hw_addr[$clog2(N3D)-1:0]] <= hw_g3d;
        default: if (32'(hw_addr) < NST) mst[hw_addr[$clog2(NST)-1:0]] <= hw_st;
      endcase
    end
  end

  // round-robin arbiter for the RE port
  logic [SW-1:0] rr, sel;
  logic          any;
  always_comb begin
    any = 1'b0; sel = rr;
    for (int k = NRE-1; k >= 0; k--) begin
      logic [SW-1:0] j;
      j = SW'((32'(rr) + k) % NRE);
      if (re_req[j]) begin any = 1'b1; sel = j; end
    end
    for (int i = 0; i < NRE; i++) re_gnt[i] = any && sel == SW'(i);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0; rd_g <= '0; rd_pix <= '0;
      for (int i = 0; i < NRE; i++) re_rvalid[i] <= 1'b0;
    end else begin
      for (int i = 0; i < NRE; i++) re_rvalid[i] <= re_gnt[i];
      if (any) begin
        rr <= SW'((32'(sel) + 1) % NRE);
        if (re_kind[sel]) rd_pix <= (32'(re_addr[sel]) < NPM) ? mpx[re_addr[sel][$clog2(NPM)-1:0]] : '0;
        else              rd_g   <= (32'(re_addr[sel]) < N2D) ? m2d[re_addr[sel][$clog2(N2D)-1:0]] : '0;
      end
    end
  end

  assign r3_data = (32'(r3_addr) < N3D) ? m3d[r3_addr[$clog2(N3D)-1:0]] : '0;
  assign st_data = (32'(st_addr) < NST) ? mst[st_addr[$clog2(NST)-1:0]] : '0;
endmodule
