// alpha_blend: Alpha Blending Unit of a Rendering Core.
//
// Blends one fragment into its pixel:  w = T*alpha, C_hat = w*C_k,
// T' = T - w (= T*(1-alpha)), and raises out_term when T' drops below T_THR,
// the early-termination signal that ends the pixel's ray. The latency of
// LAT = 3 cycles is the paper's figure for alpha blending; the unit is a
// LAT-stage pipeline (arithmetic in stage 1). The pixel's running T and colour
// are held by the Rendering Core, which shares one blending unit between two
// pixels. The threshold value 1e-4 is this design's choice.
module alpha_blend import rtgs_pkg::*; #(
  parameter int  LAT   = 3,
  parameter fx_t T_THR = 32'sd7,      // 1e-4 in Q16.16
  parameter int  TAG_W = 8
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  fx_t              in_T,
  input  fx_t              in_alpha,
  input  fx_t [2:0]        in_color,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output fx_t              out_T,
  output fx_t [2:0]        out_chat,
  output fx_t              out_w,
  output logic             out_term,
  output logic [TAG_W-1:0] out_tag
);
  typedef struct packed {
    logic             v;
    fx_t              T;
    fx_t [2:0]        chat;
    fx_t              w;
    logic             term;
    logic [TAG_W-1:0] tag;
  } stage_t;

  stage_t pipe [LAT];
  stage_t s0;

  always_comb begin
    s0.v   = in_valid;
    s0.tag = in_tag;
    s0.w   = fx_mul(in_T, in_alpha);
    for (int c = 0; c < 3; c++) s0.chat[c] = fx_mul(s0.w, in_color[c]);
    s0.T    = in_T - s0.w;
    s0.term = (s0.T < T_THR);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < LAT; i++) pipe[i] <= '0;
    end else begin
      pipe[0] <= s0;
      for (int i = 1; i < LAT; i++) pipe[i] <= pipe[i-1];
    end
  end

  assign out_valid = pipe[LAT-1].v;
  assign out_T     = pipe[LAT-1].T;
  assign out_chat  = pipe[LAT-1].chat;
  assign out_w     = pipe[LAT-1].w;
  assign out_term  = pipe[LAT-1].term;
  assign out_tag   = pipe[LAT-1].tag;
endmodule
