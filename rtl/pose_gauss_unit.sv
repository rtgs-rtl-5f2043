// pose_gauss_unit: Pose/Gaussian Computing Unit.
//
// Tracking: holds the camera pose (translation, small-angle rotation) and on
// pose_update applies one gradient step  pose <- pose - dL/dP >>> LR_SHIFT.
// Mapping: each Gaussian-level 3D gradient passing through is turned into a
// parameter update, mean <- mean - dL/dmu >>> LR_SHIFT and a colour step
// -dL/dC >>> LR_SHIFT, reported on the output stream (out_upd = 1).
// In tracking the 3D gradients pass through unchanged (out_upd = 0) so the
// GPU can score Gaussians for pruning. The paper names the unit only; the
// plain gradient step and its power-of-two learning rate are this design's.
// Stream: one-entry output register, in_ready = !out_valid || out_ready.
module pose_gauss_unit import rtgs_pkg::*; #(
  parameter int LR_SHIFT = 8
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    mapping,
  input  logic    pose_load,
  input  pose6_t  pose_init,
  input  logic    pose_update,
  input  pose6_t  dldp,
  output pose6_t  pose,
  input  logic    in_valid,
  input  grad3d_t in_grad,
  output logic    in_ready,
  output logic    out_valid,
  output grad3d_t out_data,
  output logic    out_upd,
  input  logic    out_ready
);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pose <= '0; out_valid <= 1'b0; out_data <= '0; out_upd <= 1'b0;
    end else begin
      if (pose_load) pose <= pose_init;
      else if (pose_update)
        for (int c = 0; c < 6; c++) pose[c] <= pose[c] - (dldp[c] >>> LR_SHIFT);
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_upd <= mapping;
          if (mapping) begin
            out_data.gid <= in_grad.gid;
            for (int c = 0; c < 3; c++) begin
              out_data.pw[c]   <= in_grad.pw[c] - (in_grad.dmu[c] >>> LR_SHIFT);
              out_data.dmu[c]  <= in_grad.dmu[c];
              out_data.dcol[c] <= -(in_grad.dcol[c] >>> LR_SHIFT);
            end
          end else begin
            out_data <= in_grad;
          end
        end
      end
    end
  end
endmodule
