// rendering_core: Rendering Core (RC), forward rendering of one pixel pair.
//
// An RC owns two alpha computing units, one per pixel, and a single alpha
// blending unit shared by its two pixels, as the paper describes. It walks the
// subtile's depth-sorted 2D Gaussian list for pixel a and pixel b:
//  * while both pixels are alive, unit 0 evaluates the next Gaussian of pixel
//    a and unit 1 that of pixel b;
//  * once one pixel has terminated, both units evaluate consecutive Gaussians
//    of the remaining pixel, and the blending unit blends them in order.
// A pixel ends when its transmittance falls below the threshold (early
// termination from alpha_blend) or its list is exhausted; the RC then pulses
// term_valid with the pixel id, the signal the WSU uses to learn the
// completion order.
// Timing: a round (one or two fragments) is issued when the previous round's
// alphas arrive, so rounds overlap blending; alpha results arrive LAT_A (12)
// cycles after issue, and each blend takes LAT_B (3) cycles plus one cycle to
// update the pixel state. Two blends (8 cycles) hide behind the 12-cycle alpha
// latency, which is the pipeline balancing argued in the paper. Fragments of a
// pixel that terminated while they were in flight are dropped. Each blended
// fragment is written to the R&B buffer (wr_*), fragment index k = position
// in the list. Which pixels form a pair comes from the WSU.
module rendering_core import rtgs_pkg::*; #(
  parameter int LAT_A = 12,
  parameter int LAT_B = 3,
  parameter int K_W   = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  start,
  input  logic [K_W-1:0]        n_g,
  input  logic [PIX_W-1:0]      pix [2],
  input  fx_t                   px  [2],
  input  fx_t                   py  [2],
  // 2D buffer read ports (combinational)
  output logic [K_W-1:0]        g_idx  [2],
  input  gauss2d_t              g_data [2],
  // R&B buffer write
  output logic                  wr_valid,
  output logic [PIX_W-1:0]      wr_pix,
  output logic [K_W-1:0]        wr_k,
  output rb_entry_t             wr_entry,
  // completion (termination) signals to the WSU
  output logic [1:0]            term_valid,
  output logic [PIX_W-1:0]      term_pix [2],
  // results
  output fx_t [2:0]             color [2],
  output fx_t                   trans [2],
  output logic [K_W-1:0]        nfrag [2],
  output logic                  busy,
  output logic                  fin
);
  localparam int TAG_W = 1 + K_W;

  typedef struct packed {
    logic           v;
    logic           slot;
    logic [K_W-1:0] idx;
    fx_t            alpha;
    fx_t [2:0]      col;
  } pend_t;

  logic [PIX_W-1:0] pix_q [2];
  fx_t              px_q  [2], py_q [2];
  logic [K_W-1:0]   ng_q;
  logic [K_W-1:0]   nxt   [2];
  logic [1:0]       done;
  logic             running, inflight;
  fx_t [2:0]        icol  [2];      // colours of the round in flight

  // ---- issue -----------------------------------------------------------------
  logic             rem  [2];
  logic             iss_v [2];
  logic             iss_slot [2];
  logic [K_W-1:0]   iss_idx [2];
  logic             arrive, can_issue, issue;
  logic             u_v [2];
  fx_t              u_alpha [2];
  logic [TAG_W-1:0] u_tag [2];

  always_comb begin
    for (int s = 0; s < 2; s++) rem[s] = !done[s] && (nxt[s] < ng_q);
    iss_v[0] = 1'b0; iss_v[1] = 1'b0;
    iss_slot[0] = 1'b0; iss_slot[1] = 1'b1;
    iss_idx[0] = nxt[0]; iss_idx[1] = nxt[1];
    if (rem[0] && rem[1]) begin
      iss_v[0] = 1'b1; iss_v[1] = 1'b1;
    end else if (rem[0] || rem[1]) begin
      iss_slot[0] = rem[1];
      iss_slot[1] = rem[1];
      iss_idx[0]  = rem[1] ? nxt[1] : nxt[0];
      iss_idx[1]  = iss_idx[0] + 1'b1;
      iss_v[0]    = 1'b1;
      iss_v[1]    = (iss_idx[1] < ng_q);
    end
    arrive    = u_v[0] || u_v[1];
    can_issue = running && (!inflight || arrive);
    issue     = can_issue && iss_v[0];
    g_idx[0]  = iss_idx[0];
    g_idx[1]  = iss_idx[1];
  end

  for (genvar u = 0; u < 2; u++) begin : g_alpha
    alpha_comp #(.LAT(LAT_A), .TAG_W(TAG_W)) u_ac (
      .clk, .rst_n,
      .in_valid (issue && iss_v[u]),
      .in_px    (px_q[iss_slot[u]]),
      .in_py    (py_q[iss_slot[u]]),
      .in_g     (g_data[u]),
      .in_tag   ({iss_slot[u], iss_idx[u]}),
      .out_valid(u_v[u]),
      .out_alpha(u_alpha[u]),
      .out_tag  (u_tag[u])
    );
  end

  // ---- blending ---------------------------------------------------------------
  pend_t            pq [2];         // results waiting for the shared blender
  logic             bbusy;
  pend_t            bcur;
  fx_t              T     [2];
  fx_t [2:0]        cacc  [2];
  logic [K_W-1:0]   cnt   [2];
  logic             b_ov, b_term;
  fx_t              b_T, b_w;
  fx_t [2:0]        b_chat;
  logic [TAG_W-1:0] b_tag;
  logic             b_issue, b_drop;

  always_comb begin
    b_issue = pq[0].v && !bbusy && !done[pq[0].slot];
    b_drop  = pq[0].v && !bbusy &&  done[pq[0].slot];
  end

  alpha_blend #(.LAT(LAT_B), .TAG_W(TAG_W)) u_ab (
    .clk, .rst_n,
    .in_valid (b_issue),
    .in_T     (T[pq[0].slot]),
    .in_alpha (pq[0].alpha),
    .in_color (pq[0].col),
    .in_tag   ({pq[0].slot, pq[0].idx}),
    .out_valid(b_ov),
    .out_T    (b_T),
    .out_chat (b_chat),
    .out_w    (b_w),
    .out_term (b_term),
    .out_tag  (b_tag)
  );

  logic           bs;
  logic [K_W-1:0] bk;
  assign bs = b_tag[K_W];
  assign bk = b_tag[K_W-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; inflight <= 1'b0; bbusy <= 1'b0; done <= 2'b11;
      ng_q <= '0; term_valid <= '0; bcur <= '0;
      for (int s = 0; s < 2; s++) begin
        pix_q[s] <= '0; px_q[s] <= '0; py_q[s] <= '0; nxt[s] <= '0; T[s] <= FX_ONE;
        cacc[s] <= '0; cnt[s] <= '0; pq[s] <= '0; icol[s] <= '0; term_pix[s] <= '0;
      end
    end else begin
      term_valid <= '0;
      if (start) begin
        running  <= 1'b1;
        inflight <= 1'b0;
        ng_q     <= n_g;
        done     <= (n_g == 0) ? 2'b11 : 2'b00;
        term_valid <= (n_g == 0) ? 2'b11 : 2'b00;
        for (int s = 0; s < 2; s++) begin
          pix_q[s] <= pix[s]; px_q[s] <= px[s]; py_q[s] <= py[s];
          term_pix[s] <= pix[s];
          nxt[s] <= '0; T[s] <= FX_ONE; cacc[s] <= '0; cnt[s] <= '0; pq[s] <= '0;
        end
      end else begin
        // issue bookkeeping
        if (issue) begin
          inflight <= 1'b1;
          if (iss_slot[0] == iss_slot[1])
            nxt[iss_slot[0]] <= iss_idx[0] + (iss_v[1] ? K_W'(2) : K_W'(1));
          else begin
            nxt[0] <= nxt[0] + 1'b1;
            nxt[1] <= nxt[1] + 1'b1;
          end
          icol[0] <= g_data[0].color;
          icol[1] <= g_data[1].color;
        end else if (arrive) begin
          inflight <= 1'b0;
        end
        // pending queue: arrival of a round, or pop of the head
        if (arrive) begin
          if (u_v[0]) begin
            pq[0] <= '{v: 1'b1, slot: u_tag[0][K_W], idx: u_tag[0][K_W-1:0], alpha: u_alpha[0], col: icol[0]};
            pq[1] <= '{v: u_v[1], slot: u_tag[1][K_W], idx: u_tag[1][K_W-1:0], alpha: u_alpha[1], col: icol[1]};
          end
        end else if (b_drop || (b_ov && bbusy)) begin
          pq[0] <= pq[1];
          pq[1] <= '0;
        end
        if (b_issue) begin
          bbusy <= 1'b1;
          bcur  <= pq[0];
        end
        if (b_ov) begin
          bbusy      <= 1'b0;
          T[bs]      <= b_T;
          for (int c = 0; c < 3; c++) cacc[bs][c] <= cacc[bs][c] + b_chat[c];
          cnt[bs]    <= bk + 1'b1;
          if (b_term || (bk + 1'b1 == ng_q)) begin
            done[bs]       <= 1'b1;
            term_valid[bs] <= 1'b1;
          end
        end
        if (running && fin) running <= 1'b0;
      end
    end
  end

  assign wr_valid = b_ov;
  assign wr_pix   = pix_q[bs];
  assign wr_k     = bk;
  assign wr_entry = '{chat: b_chat, alpha: bcur.alpha, w: b_w};

  assign fin  = (&done) && !inflight && !pq[0].v && !bbusy && !arrive;
  assign busy = running;
  for (genvar s = 0; s < 2; s++) begin : g_res
    assign color[s] = cacc[s];
    assign trans[s] = T[s];
    assign nfrag[s] = cnt[s];
  end

  // a round may only arrive when the blender has drained the previous one
  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n) arrive |-> !pq[0].v);
endmodule
