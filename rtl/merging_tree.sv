// merging_tree: Merging Tree for the camera-pose gradient.
//
// Sums the per-Gaussian pose gradients dL/dP_k that the NIN Preprocessing
// Engines produce in the same cycle with a pipelined binary adder tree
// ($clog2(NIN) register levels) and accumulates the tree output into dL/dP.
// clr zeroes the accumulator (start of an iteration). Inputs without valid
// count as zero. busy is high while any level holds a valid sum.
module merging_tree import rtgs_pkg::*; #(
  parameter int NIN = 16
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clr,
  input  logic   in_valid [NIN],
  input  pose6_t in_grad  [NIN],
  output pose6_t sum,
  output logic   busy
);
  localparam int LV = $clog2(NIN);
  localparam int NP = 1 << LV;

  pose6_t lvl [LV+1][NP];
  logic   lv  [LV+1][NP];

  always_comb begin
    for (int i = 0; i < NP; i++) begin
      lvl[0][i] = (i < NIN && in_valid[i]) ? in_grad[i] : '0;
      lv[0][i]  = (i < NIN) && in_valid[i];
    end
  end

  for (genvar l = 0; l < LV; l++) begin : g_lvl
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int i = 0; i < NP; i++) begin lvl[l+1][i] <= '0; lv[l+1][i] <= 1'b0; end
      end else begin
        for (int i = 0; i < (NP >> (l+1)); i++) begin
          for (int c = 0; c < 6; c++) lvl[l+1][i][c] <= lvl[l][2*i][c] + lvl[l][2*i+1][c];
          lv[l+1][i] <= lv[l][2*i] || lv[l][2*i+1];
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) sum <= '0;
    else if (clr) sum <= '0;
    else if (lv[LV][0]) for (int c = 0; c < 6; c++) sum[c] <= sum[c] + lvl[LV][0][c];
  end

  always_comb begin
    busy = 1'b0;
    for (int l = 1; l <= LV; l++) for (int i = 0; i < (NP >> l); i++) busy |= lv[l][i];
  end
endmodule
