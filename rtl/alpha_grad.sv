// alpha_grad: Alpha Gradient Computing Unit of a Rendering BP Core.
//
// Computes  dL/dalpha_k = sum_c (C_k[c] - S[c]) * dL/dC_P[c],
// with S = sum_{n>k} C_hat_{P,n}, the form given for the alpha gradient.
// Because C_hat comes from the R&B buffer (kept from rendering) no alpha or
// transmittance has to be recomputed and the latency is LAT = 4 cycles, the
// figure given for the unit with reuse (20 without). The running sum S is kept
// by the caller (rbc), which adds C_hat_k after issuing fragment k.
// LAT-stage pipeline, one fragment per cycle; in_tag travels along.
module alpha_grad import rtgs_pkg::*; #(
  parameter int LAT   = 4,
  parameter int TAG_W = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t [2:0]        in_color,   // C_k
  input  fx_t [2:0]        in_s,       // sum of C_hat behind k
  input  fx_t [2:0]        in_dldc,    // dL/dC_P
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fx_t              out_dlda,
  output logic [TAG_W-1:0] out_tag
);
  typedef struct packed {
    logic             v;
    fx_t              d;
    logic [TAG_W-1:0] tag;
  } stage_t;
  stage_t pipe [LAT];
  fx_t acc;

  always_comb begin
    acc = '0;
    for (int c = 0; c < 3; c++) acc += fx_mul(in_color[c] - in_s[c], in_dldc[c]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe[i] <= '0;
    end else begin
      pipe[0] <= '{v: in_valid, d: acc, tag: in_tag};
      for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign out_valid = pipe[LAT-1].v;
  assign out_dlda  = pipe[LAT-1].d;
  assign out_tag   = pipe[LAT-1].tag;
endmodule
