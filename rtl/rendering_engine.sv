// rendering_engine: Rendering Engine (RE), rendering and rendering BP of one
// 4x4-pixel subtile.
//
// Contents, after the paper's RE: a 2D buffer holding the subtile's sorted 2D
// Gaussians, a pixel buffer with the 16 ground-truth colours, 8 Rendering
// Cores (one per pixel pair), the Loss Computing Unit, the R&B buffer, 8
// Rendering BP Cores, the Workload Scheduling Unit, and the 2D gradient
// output queue. The WSU decides which two pixels share an RC (and the RBC of
// the same index); selecting any pixel for any core is the "fully connected"
// assignment from pixel and 2D buffers to cores.
// Sequence for one subtile (accepted on st_valid while st_ready):
//   LDG   fetch g_count 2D Gaussians from the Gaussian cache (mem_*)
//   LDP   fetch the 16 ground-truth pixels
//   REND  all RCs render; each pixel ends by early termination or list end
//   LOSS  dL/dC_P for all pixels
//   BP    rounds of the RBCs, fragments back to front, one round per
//         8 cycles; every round pushes one 16-lane gradient vector
//         (lane 2i+s = RBC i slot s) into the output queue
//   CFG   wait for the WSU's new pairing, then pulse done_valid with it
// Cache requests: one outstanding at a time, mem_req held until mem_gnt, data
// on mem_rvalid the cycle after the grant. Output queue: out_valid/out_ready.
// A round is started only when the output queue has room for it and for the
// rounds still in flight, so BP stalls on a full queue instead of losing data.
// Lists longer than MAX_G are cut to MAX_G (a limit of this design).
module rendering_engine import rtgs_pkg::*; #(
  parameter int MAX_G   = 32,
  parameter int K_W     = 8,
  parameter int Q_DEPTH = 4,
  parameter int LAT_A   = 12,
  parameter int LAT_B   = 3,
  parameter int LAT_AG  = 4,
  parameter int LAT_CP  = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // subtile dispatch
  input  logic        st_valid,
  input  subtile_t    st_desc,
  input  logic        st_cfg_valid,
  input  pair_cfg_t   st_cfg,
  output logic        st_ready,
  // Gaussian cache read port
  output logic        mem_req,
  output logic        mem_kind,     // 0: 2D Gaussian, 1: pixel
  output logic [15:0] mem_addr,
  input  logic        mem_gnt,
  input  logic        mem_rvalid,
  input  gauss2d_t    mem_rg,
  input  fx_t [2:0]   mem_rpix,
  // 2D gradient output queue
  output logic        out_valid,
  output gradvec_t    out_vec,
  input  logic        out_ready,
  // completion
  output logic        done_valid,
  output logic [15:0] done_st_id,
  output pair_cfg_t   done_cfg,
  output fx_t         done_loss
);
  typedef enum logic [2:0] {S_IDLE, S_LDG, S_LDP, S_REND, S_LOSS, S_BP, S_DRAIN, S_CFG} state_e;
  state_e state;

  subtile_t         desc;
  logic [K_W-1:0]   ng;
  gauss2d_t         gbuf [MAX_G];       // 2D buffer
  fx_t [2:0]        gt   [NPIX];        // pixel buffer
  logic [K_W-1:0]   li, ri;             // load issue / response index
  logic             rend_chk;
  logic [K_W-1:0]   round, maxcnt;
  logic [3:0]       gap;
  logic [2:0]       inflight;
  logic             cfg_ready;
  pair_cfg_t        cfg_new;
  fx_t              loss_q;

  // ---- pixel coordinates ------------------------------------------------------
  fx_t pxc [NPIX], pyc [NPIX];
  always_comb
    for (int p = 0; p < NPIX; p++) begin
      pxc[p] = fx_int(desc.x0 + 16'(p % 4));
      pyc[p] = fx_int(desc.y0 + 16'(p / 4));
    end

  // ---- WSU ----------------------------------------------------------------------
  pair_cfg_t        pairs;
  logic [1:0]       term_v   [NPAIR];
  logic [PIX_W-1:0] term_pix [NPAIR][2];
  pair_cfg_t        wsu_cfg;
  logic             wsu_cfg_v;
  logic             accept;
  assign accept   = st_valid && st_ready;
  assign st_ready = (state == S_IDLE);

  wsu u_wsu (
    .clk, .rst_n, .start(accept), .cfg_in_valid(st_cfg_valid), .cfg_in(st_cfg),
    .pairs, .term_valid(term_v), .term_pix, .cfg_out(wsu_cfg), .cfg_out_valid(wsu_cfg_v)
  );

  // ---- Rendering Cores and R&B buffer ----------------------------------------
  logic             rc_start;
  logic             rc_fin [NPAIR];
  logic             rc_busy [NPAIR];
  fx_t [2:0]        rc_col [NPAIR][2];
  fx_t              rc_T   [NPAIR][2];
  logic [K_W-1:0]   rc_nf  [NPAIR][2];
  logic             rbw_v  [NPAIR];
  logic [PIX_W-1:0] rbw_p  [NPAIR];
  logic             rbw_s  [NPAIR];
  logic [K_W-1:0]   rbw_k  [NPAIR];
  rb_entry_t        rbw_d  [NPAIR];
  logic [K_W-1:0]   rbr_k  [NPIX];
  rb_entry_t        rbr_d  [NPIX];

  for (genvar i = 0; i < NPAIR; i++) begin : g_rc
    logic [PIX_W-1:0] pp [2];
    fx_t              ppx [2], ppy [2];
    logic [K_W-1:0]   gi [2];
    gauss2d_t         gd [2];
    assign pp[0] = pairs[i].a;
    assign pp[1] = pairs[i].b;
    for (genvar s = 0; s < 2; s++) begin : g_s
      assign ppx[s] = pxc[pp[s]];
      assign ppy[s] = pyc[pp[s]];
      assign gd[s]  = (32'(gi[s]) < MAX_G) ? gbuf[gi[s][$clog2(MAX_G)-1:0]] : '0;
    end
    rendering_core #(.LAT_A(LAT_A), .LAT_B(LAT_B), .K_W(K_W)) u_rc (
      .clk, .rst_n, .start(rc_start), .n_g(ng), .pix(pp), .px(ppx), .py(ppy),
      .g_idx(gi), .g_data(gd),
      .wr_valid(rbw_v[i]), .wr_pix(rbw_p[i]), .wr_k(rbw_k[i]), .wr_entry(rbw_d[i]),
      .term_valid(term_v[i]), .term_pix(term_pix[i]),
      .color(rc_col[i]), .trans(rc_T[i]), .nfrag(rc_nf[i]), .busy(rc_busy[i]), .fin(rc_fin[i])
    );
    assign rbw_s[i] = (rbw_p[i] == pairs[i].b);
  end

  rb_buffer #(.MAX_G(MAX_G), .K_W(K_W)) u_rb (
    .clk, .wr_valid(rbw_v), .wr_slot(rbw_s), .wr_k(rbw_k), .wr_data(rbw_d),
    .rd_k(rbr_k), .rd_data(rbr_d)
  );

  // per-pixel results gathered through the pairing
  fx_t [2:0]      pcol [NPIX];
  logic [K_W-1:0] pcnt [NPIX];
  logic           all_fin;
  always_comb begin
    for (int p = 0; p < NPIX; p++) begin pcol[p] = '0; pcnt[p] = '0; end
    all_fin = 1'b1;
    for (int i = 0; i < NPAIR; i++) begin
      pcol[pairs[i].a] = rc_col[i][0]; pcnt[pairs[i].a] = rc_nf[i][0];
      pcol[pairs[i].b] = rc_col[i][1]; pcnt[pairs[i].b] = rc_nf[i][1];
      all_fin &= rc_fin[i];
    end
  end

  // ---- loss -----------------------------------------------------------------------
  logic      loss_go, loss_ov;
  fx_t [2:0] dldc [NPIX];
  fx_t       loss_v;
  loss_comp u_loss (.clk, .rst_n, .in_valid(loss_go), .color(pcol), .gt,
                    .out_valid(loss_ov), .dldc, .loss(loss_v));

  // ---- Rendering BP Cores ---------------------------------------------------------
  logic    bp_clr, round_go;
  logic    rbc_ov [NPAIR];
  grad2d_t rbc_g  [NPAIR][2];

  for (genvar i = 0; i < NPAIR; i++) begin : g_rbc
    logic      lv [2];
    rb_entry_t re [2];
    gauss2d_t  gg [2];
    fx_t [2:0] dc [2];
    fx_t       qx [2], qy [2];
    for (genvar s = 0; s < 2; s++) begin : g_s
      logic [PIX_W-1:0] p;
      logic [K_W-1:0]   k;
      assign p  = (s == 0) ? pairs[i].a : pairs[i].b;
      assign lv[s] = round < pcnt[p];
      assign k  = pcnt[p] - 1'b1 - round;
      assign rbr_k[2*i+s] = k;
      assign re[s] = rbr_d[2*i+s];
      assign gg[s] = (32'(k) < MAX_G) ? gbuf[k[$clog2(MAX_G)-1:0]] : '0;
      assign dc[s] = dldc[p];
      assign qx[s] = pxc[p];
      assign qy[s] = pyc[p];
    end
    rbc #(.LAT_AG(LAT_AG), .LAT_CP(LAT_CP)) u_rbc (
      .clk, .rst_n, .clr(bp_clr), .round_start(round_go), .lane_v(lv), .rb(re), .g(gg),
      .dldc(dc), .px(qx), .py(qy), .out_valid(rbc_ov[i]), .out_grad(rbc_g[i])
    );
  end

  // ---- output queue ---------------------------------------------------------------
  gradvec_t q_din;
  logic     q_full, q_empty;
  logic [$clog2(Q_DEPTH+1)-1:0] q_cnt;
  always_comb
    for (int i = 0; i < NPAIR; i++) begin
      q_din[2*i]   = rbc_g[i][0];
      q_din[2*i+1] = rbc_g[i][1];
    end
  sync_fifo #(.T(gradvec_t), .DEPTH(Q_DEPTH)) u_oq (
    .clk, .rst_n, .push(rbc_ov[0]), .din(q_din), .pop(out_ready), .dout(out_vec),
    .full(q_full), .empty(q_empty), .count(q_cnt)
  );
  assign out_valid = !q_empty;

  // ---- control ----------------------------------------------------------------------
  logic room;
  assign room     = (32'(q_cnt) + 32'(inflight)) < Q_DEPTH;
  assign round_go = (state == S_BP) && (gap == 0) && room;
  assign mem_req  = (state == S_LDG && li < ng) || (state == S_LDP && 32'(li) < NPIX);
  assign mem_kind = (state == S_LDP);
  assign mem_addr = (state == S_LDP) ? desc.p_start + 16'(li) : desc.g_start + 16'(li);

  // 2D buffer: plain memory, one write port, no reset
  always_ff @(posedge clk)
    if (state == S_LDG && mem_rvalid) gbuf[ri[$clog2(MAX_G)-1:0]] <= mem_rg;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; desc <= '0; ng <= '0; li <= '0; ri <= '0; rend_chk <= 1'b0;
      round <= '0; maxcnt <= '0; gap <= '0; inflight <= '0; cfg_ready <= 1'b0;
      cfg_new <= default_pairs(); loss_q <= '0; rc_start <= 1'b0; loss_go <= 1'b0;
      bp_clr <= 1'b0; done_valid <= 1'b0; done_st_id <= '0; done_cfg <= default_pairs();
      done_loss <= '0;
      for (int p = 0; p < NPIX; p++) gt[p] <= '0;
    end else begin
      rc_start   <= 1'b0;
      loss_go    <= 1'b0;
      bp_clr     <= 1'b0;
      done_valid <= 1'b0;
      if (wsu_cfg_v) begin cfg_ready <= 1'b1; cfg_new <= wsu_cfg; end
      inflight <= inflight + (round_go ? 3'd1 : 3'd0) - (rbc_ov[0] ? 3'd1 : 3'd0);
      if (mem_req && mem_gnt) li <= li + 1'b1;
      if (gap != 0) gap <= gap - 1'b1;
      case (state)
        S_IDLE: if (accept) begin
          desc  <= st_desc;
          ng    <= (st_desc.g_count > MAX_G) ? K_W'(MAX_G) : K_W'(st_desc.g_count);
          li    <= '0; ri <= '0; cfg_ready <= 1'b0;
          state <= S_LDG;
        end
        S_LDG: begin
          if (mem_rvalid) ri <= ri + 1'b1;
          if ((mem_rvalid ? ri + 1'b1 : ri) == ng && !(mem_req && mem_gnt)) begin
            state <= S_LDP; li <= '0; ri <= '0;
          end
        end
        S_LDP: begin
          if (mem_rvalid) begin
            gt[ri[PIX_W-1:0]] <= mem_rpix;
            ri <= ri + 1'b1;
            if (ri == K_W'(NPIX-1)) begin
              state <= S_REND; rc_start <= 1'b1; rend_chk <= 1'b0;
            end
          end
        end
        S_REND: begin
          rend_chk <= 1'b1;
          if (rend_chk && !rc_start && all_fin) begin
            state <= S_LOSS; loss_go <= 1'b1; bp_clr <= 1'b1;
          end
        end
        S_LOSS: if (loss_ov) begin
          logic [K_W-1:0] m;
          m = '0;
          for (int p = 0; p < NPIX; p++) if (pcnt[p] > m) m = pcnt[p];
          maxcnt <= m; round <= '0; gap <= '0; loss_q <= loss_v;
          state  <= (m == 0) ? S_DRAIN : S_BP;
        end
        S_BP: if (round_go) begin
          gap   <= 4'(2*LAT_AG - 1);
          round <= round + 1'b1;
          if (round + 1'b1 == maxcnt) state <= S_DRAIN;
        end
        S_DRAIN: if (inflight == 0 && !round_go) state <= S_CFG;
        S_CFG: if (cfg_ready || wsu_cfg_v) begin
          done_valid <= 1'b1;
          done_st_id <= desc.st_id;
          done_cfg   <= wsu_cfg_v ? wsu_cfg : cfg_new;
          done_loss  <= loss_q;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_q_overflow: assert property (@(posedge clk) disable iff (!rst_n) rbc_ov[0] |-> !q_full);
endmodule
