// rbc: Rendering Backpropagation Core (RBC) for one pixel pair.
//
// One alpha-gradient unit (LAT_AG = 4 cycles) is shared by the two pixels and
// each pixel has its own covariance/position gradient unit (LAT_CP = 8), the
// resource split the paper derives from the 4- and 8-cycle latencies. A BP
// round handles one fragment per pixel, walking each pixel's fragments from
// back to front. Schedule of a round started at t (round_start):
//   t        slot 0 enters alpha_grad          t+4   slot 0 enters covpos 0,
//                                                     slot 1 enters alpha_grad
//   t+8      slot 1 enters covpos 1            t+16  both gradients out
// A new round may start every 2*LAT_AG = 8 cycles. Slot 0's result is
// delayed LAT_AG cycles so both leave together (out_valid). The running sum
// S = sum_{n>k} C_hat of each pixel is kept here; clr resets it at the start
// of a subtile. A slot with lane_v low is skipped and yields an invalid
// gradient.
module rbc import rtgs_pkg::*; #(
  parameter int LAT_AG = 4,
  parameter int LAT_CP = 8
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      clr,
  input  logic      round_start,
  input  logic      lane_v [2],
  input  rb_entry_t rb     [2],
  input  gauss2d_t  g      [2],
  input  fx_t [2:0] dldc   [2],
  input  fx_t       px     [2],
  input  fx_t       py     [2],
  output logic      out_valid,
  output grad2d_t   out_grad [2]
);
  localparam int TOT = 2*LAT_AG + LAT_CP;

  logic      lv_q [2];
  rb_entry_t rb_q [2];
  gauss2d_t  g_q  [2];
  fx_t [2:0] dc_q [2];
  fx_t       dx_q [2], dy_q [2];
  fx_t [2:0] S    [2];
  logic [LAT_AG-1:0] ph;      // round_start delayed, issues slot 1
  logic [TOT-1:0]    rs_d;    // round_start delayed to the output

  // alpha-gradient issue: slot 0 straight from the inputs, slot 1 from its latch
  logic       ag_v, ag_slot;
  fx_t [2:0]  ag_col, ag_s, ag_dc;
  always_comb begin
    if (round_start) begin
      ag_v = lane_v[0]; ag_slot = 1'b0;
      ag_col = g[0].color; ag_s = S[0]; ag_dc = dldc[0];
    end else begin
      ag_v = ph[LAT_AG-1] && lv_q[1]; ag_slot = 1'b1;
      ag_col = g_q[1].color; ag_s = S[1]; ag_dc = dc_q[1];
    end
  end

  logic       ag_ov;
  fx_t        ag_d;
  logic [0:0] ag_tag;
  alpha_grad #(.LAT(LAT_AG), .TAG_W(1)) u_ag (
    .clk, .rst_n, .in_valid(ag_v), .in_color(ag_col), .in_s(ag_s), .in_dldc(ag_dc),
    .in_tag(ag_slot), .out_valid(ag_ov), .out_dlda(ag_d), .out_tag(ag_tag)
  );

  grad2d_t cp_out [2];
  for (genvar s = 0; s < 2; s++) begin : g_cp
    covpos_grad #(.LAT(LAT_CP)) u_cp (
      .clk, .rst_n,
      .in_valid(ag_ov && ag_tag[0] == 1'(s)),
      .in_dlda (ag_d),
      .in_alpha(rb_q[s].alpha),
      .in_w    (rb_q[s].w),
      .in_dldc (dc_q[s]),
      .in_dx   (dx_q[s]),
      .in_dy   (dy_q[s]),
      .in_g    (g_q[s]),
      .out_grad(cp_out[s])
    );
  end

  grad2d_t d0 [LAT_AG];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ph <= '0; rs_d <= '0;
      for (int s = 0; s < 2; s++) begin
        lv_q[s] <= 1'b0; rb_q[s] <= '0; g_q[s] <= '0; dc_q[s] <= '0;
        dx_q[s] <= '0; dy_q[s] <= '0; S[s] <= '0;
      end
      for (int i = 0; i < LAT_AG; i++) d0[i] <= '0;
    end else begin
      ph   <= {ph[LAT_AG-2:0], round_start};
      rs_d <= {rs_d[TOT-2:0], round_start};
      if (clr) begin
        S[0] <= '0; S[1] <= '0;
      end else if (ag_v) begin
        for (int c = 0; c < 3; c++) S[ag_slot][c] <= S[ag_slot][c] + (ag_slot ? rb_q[1].chat[c] : rb[0].chat[c]);
      end
      if (round_start) begin
        for (int s = 0; s < 2; s++) begin
          lv_q[s] <= lane_v[s]; rb_q[s] <= rb[s]; g_q[s] <= g[s]; dc_q[s] <= dldc[s];
          dx_q[s] <= px[s] - g[s].mu_x; dy_q[s] <= py[s] - g[s].mu_y;
        end
      end
      d0[0] <= cp_out[0];
      for (int i = 1; i < LAT_AG; i++) d0[i] <= d0[i-1];
    end
  end

  assign out_valid   = rs_d[TOT-1];
  assign out_grad[0] = d0[LAT_AG-1];
  assign out_grad[1] = cp_out[1];

  // rounds must be at least 2*LAT_AG cycles apart
  a_round_gap: assert property (@(posedge clk) disable iff (!rst_n)
                 round_start |-> (rs_d[2*LAT_AG-2:0] == '0));
endmodule
