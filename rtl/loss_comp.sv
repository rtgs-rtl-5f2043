// loss_comp: Loss Computing Unit of a Rendering Engine.
//
// For the 16 pixels of a subtile it forms the colour loss gradient
// dL/dC_P = C_P - C_gt and the subtile's squared colour error
// sum_P sum_c (C_P - C_gt)^2 / 2. The paper names the unit; the loss here is
// the photometric L2 term only (the geometric depth term and the L1 norms
// used by some SLAM systems are not modelled), a choice of this design.
// Timing: results register one cycle after in_valid.
module loss_comp import rtgs_pkg::*; (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      in_valid,
  input  fx_t [2:0] color [NPIX],
  input  fx_t [2:0] gt    [NPIX],
  output logic      out_valid,
  output fx_t [2:0] dldc  [NPIX],
  output fx_t       loss
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      loss      <= '0;
      for (int p = 0; p < NPIX; p++) dldc[p] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        fx_t acc;
        acc = '0;
        for (int p = 0; p < NPIX; p++)
          for (int c = 0; c < 3; c++) begin
            dldc[p][c] <= color[p][c] - gt[p][c];
            acc += fx_mul(FX_HALF, fx_mul(color[p][c] - gt[p][c], color[p][c] - gt[p][c]));
          end
        loss <= acc;
      end
    end
  end
endmodule
