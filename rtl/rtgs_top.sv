// rtgs_top: the RTGS plug-in, rendering + rendering BP + preprocessing BP of
// 3DGS-SLAM iterations, attached to a GPU through a shared cache.
//
// Dataflow (one iteration, started by exec):
//   Gaussian Sharing Cache --(subtile streaming)--> 16 Rendering Engines
//   REs --16-lane fragment gradients--> 4 GMUs (4 REs each)
//   GMUs --merged gradients--> Stage Buffer --Gaussian-level 2D gradients-->
//   16 Preprocessing Engines --3D gradients--> Pose/Gaussian Computing Unit
//                            --pose gradients--> Merging Tree --dL/dP--> pose
// The GPU side is outside this module: it writes the cache through hw_*,
// signals input_done / pruning_done, and receives 3D gradients (tracking) or
// Gaussian updates (mapping) on go_*. The camera intrinsics and rotation used
// by the preprocessing BP are inputs (cam_*), as the GPU's projection step
// owns them. Unit counts (16 RE, 8 RC/RBC per RE, 16 WSU, 4 GMU, 16 PE) are
// the paper's configuration.
// Evictions from the Stage Buffer go to the PEs in round-robin order; the 3D
// data of the evicted Gaussian is read from the cache on the way. The 16 PE
// outputs are collected round robin into the Pose/Gaussian unit.
module rtgs_top import rtgs_pkg::*; #(
  parameter int NRE    = 16,
  parameter int NGMU   = 4,
  parameter int NPE    = 16,
  parameter int MAX_G  = 32,
  parameter int SB_IDX = 9,
  parameter int NCFG   = 2048,
  parameter int N2D    = 1024,
  parameter int NPM    = 1024,
  parameter int N3D    = 1024,
  parameter int NST    = 64,
  parameter int LR_SHIFT = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  // GPU writes into the Gaussian Sharing Cache
  input  logic        hw_valid,
  input  logic [1:0]  hw_sel,
  input  logic [15:0] hw_addr,
  input  gauss2d_t    hw_g2d,
  input  fx_t [2:0]   hw_pix,
  input  gauss3d_t    hw_g3d,
  input  subtile_t    hw_st,
  // camera
  input  fx_t         cam_fx,
  input  fx_t         cam_fy,
  input  fx_t [8:0]   cam_R,
  input  logic        pose_load,
  input  pose6_t      pose_init,
  // programming model
  input  logic        exec,
  input  logic [15:0] frame_id,
  input  logic        is_keyframe,
  input  logic [15:0] n_subtiles,
  input  logic        input_done,
  input  logic        pruning_done,
  output logic        gradient_ready,
  output status_e     status,
  // results
  output pose6_t      pose,
  output pose6_t      dldp,
  output fx_t         iter_loss,
  output logic        go_valid,
  output grad3d_t     go_data,
  output logic        go_upd,
  input  logic        go_ready
);
  localparam int RPG = NRE / NGMU;

  // ---- controller ------------------------------------------------------------
  logic disp_start, disp_done, drain_idle, flush_done, sb_flush, mt_clr, new_frame;
  logic pose_update, mapping;
  rtgs_ctrl u_ctrl (
    .clk, .rst_n, .exec, .frame_id, .is_keyframe, .input_done, .pruning_done,
    .disp_done, .drain_idle, .flush_done, .disp_start, .sb_flush, .mt_clr, .new_frame,
    .gradient_ready, .pose_update, .mapping, .status
  );

  // ---- cache -----------------------------------------------------------------
  logic        re_req [NRE], re_kind [NRE], re_gnt [NRE], re_rvalid [NRE];
  logic [15:0] re_addr [NRE];
  gauss2d_t    rd_g;
  fx_t [2:0]   rd_pix;
  gid_t        r3_addr;
  gauss3d_t    r3_data;
  logic [15:0] st_addr;
  subtile_t    st_data;
  gaussian_cache #(.NRE(NRE), .N2D(N2D), .NPM(NPM), .N3D(N3D), .NST(NST)) u_cache (
    .clk, .rst_n, .hw_valid, .hw_sel, .hw_addr, .hw_g2d, .hw_pix, .hw_g3d, .hw_st,
    .re_req, .re_kind, .re_addr, .re_gnt, .re_rvalid, .rd_g, .rd_pix,
    .r3_addr, .r3_data, .st_addr, .st_data
  );

  // ---- dispatcher -------------------------------------------------------------
  logic        re_ready [NRE], re_valid [NRE], re_done [NRE];
  subtile_t    re_desc;
  logic        re_cfg_valid;
  pair_cfg_t   re_cfg;
  logic [15:0] re_done_id [NRE];
  pair_cfg_t   re_done_cfg [NRE];
  fx_t         re_loss [NRE];
  logic        cfg_hit, disp_busy;
  subtile_dispatcher #(.NRE(NRE), .NCFG(NCFG)) u_disp (
    .clk, .rst_n, .start(disp_start), .n_st(n_subtiles), .clr_cfg(new_frame),
    .st_addr, .st_data, .re_ready, .re_valid, .re_desc, .re_cfg_valid, .re_cfg,
    .re_done, .re_done_id, .re_done_cfg, .done(disp_done), .cfg_hit, .busy(disp_busy)
  );

  // ---- rendering engines ----------------------------------------------------------
  logic     ro_valid [NRE], ro_ready [NRE];
  gradvec_t ro_vec   [NRE];
  for (genvar i = 0; i < NRE; i++) begin : g_re
    rendering_engine #(.MAX_G(MAX_G)) u_re (
      .clk, .rst_n,
      .st_valid(re_valid[i]), .st_desc(re_desc), .st_cfg_valid(re_cfg_valid), .st_cfg(re_cfg),
      .st_ready(re_ready[i]),
      .mem_req(re_req[i]), .mem_kind(re_kind[i]), .mem_addr(re_addr[i]), .mem_gnt(re_gnt[i]),
      .mem_rvalid(re_rvalid[i]), .mem_rg(rd_g), .mem_rpix(rd_pix),
      .out_valid(ro_valid[i]), .out_vec(ro_vec[i]), .out_ready(ro_ready[i]),
      .done_valid(re_done[i]), .done_st_id(re_done_id[i]), .done_cfg(re_done_cfg[i]),
      .done_loss(re_loss[i])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) iter_loss <= '0;
    else if (mt_clr) iter_loss <= '0;
    else begin
      fx_t a;
      a = iter_loss;
      for (int i = 0; i < NRE; i++) if (re_done[i]) a += re_loss[i];
      iter_loss <= a;
    end
  end

  // ---- gradient merging units ----------------------------------------------------
  logic     sq_valid [NGMU], sq_pop [NGMU], gmu_busy [NGMU];
  gradvec_t sq_vec   [NGMU];
  for (genvar m = 0; m < NGMU; m++) begin : g_gmu
    logic     iv [RPG], ir [RPG];
    gradvec_t ivec [RPG];
    for (genvar j = 0; j < RPG; j++) begin : g_in
      assign iv[j]   = ro_valid[m*RPG+j];
      assign ivec[j] = ro_vec[m*RPG+j];
      assign ro_ready[m*RPG+j] = ir[j];
    end
    gmu #(.NIN(RPG)) u_gmu (
      .clk, .rst_n, .in_valid(iv), .in_vec(ivec), .in_ready(ir),
      .out_valid(sq_valid[m]), .out_vec(sq_vec[m]), .out_ready(sq_pop[m]), .busy(gmu_busy[m])
    );
  end

  // ---- stage buffer -----------------------------------------------------------------
  logic    ev_valid, ev_ready, ev_conflict, sb_busy;
  grad2d_t ev_rec;
  stage_buffer #(.NQ(NGMU), .IDX_W(SB_IDX)) u_sb (
    .clk, .rst_n, .sq_valid, .sq_vec, .sq_pop, .flush(sb_flush), .flush_done,
    .ev_valid, .ev_rec, .ev_ready, .ev_conflict, .busy(sb_busy)
  );
  assign r3_addr = ev_rec.gid;

  // ---- preprocessing engines ------------------------------------------------------------
  localparam int PW = $clog2(NPE) > 0 ? $clog2(NPE) : 1;
  logic [PW-1:0] pe_ptr, po_ptr;
  logic    pe_in_ready [NPE], pe_ov [NPE], pe_or [NPE], pe_pv [NPE], pe_busy [NPE];
  grad3d_t pe_og [NPE];
  pose6_t  pe_pg [NPE];
  assign ev_ready = pe_in_ready[pe_ptr];
  for (genvar p = 0; p < NPE; p++) begin : g_pe
    preprocessing_engine u_pe (
      .clk, .rst_n, .cam_fx, .cam_fy, .cam_R,
      .in_valid(ev_valid && pe_ptr == PW'(p)), .in_grad(ev_rec), .in_g3(r3_data),
      .in_ready(pe_in_ready[p]),
      .out_valid(pe_ov[p]), .out_grad(pe_og[p]), .out_ready(pe_or[p]),
      .pose_valid(pe_pv[p]), .pose_grad(pe_pg[p]), .busy(pe_busy[p])
    );
  end

  // collect PE outputs round robin
  logic          pg_in_ready, pg_in_valid;
  logic [PW-1:0] po_sel;
  always_comb begin
    pg_in_valid = 1'b0; po_sel = po_ptr;
    for (int k = NPE-1; k >= 0; k--) begin
      logic [PW-1:0] j;
      j = PW'((32'(po_ptr) + k) % NPE);
      if (pe_ov[j]) begin pg_in_valid = 1'b1; po_sel = j; end
    end
    for (int p = 0; p < NPE; p++) pe_or[p] = pg_in_valid && pg_in_ready && po_sel == PW'(p);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin pe_ptr <= '0; po_ptr <= '0; end
    else begin
      if (ev_valid && ev_ready) pe_ptr <= PW'((32'(pe_ptr) + 1) % NPE);
      if (pg_in_valid && pg_in_ready) po_ptr <= PW'((32'(po_sel) + 1) % NPE);
    end
  end

  // ---- merging tree and pose/Gaussian unit ------------------------------------------------
  logic mt_busy;
  logic pe_pv_t [NPE];
  always_comb for (int p = 0; p < NPE; p++) pe_pv_t[p] = pe_pv[p] && !mapping;
  merging_tree #(.NIN(NPE)) u_mt (
    .clk, .rst_n, .clr(mt_clr), .in_valid(pe_pv_t), .in_grad(pe_pg), .sum(dldp), .busy(mt_busy)
  );

  pose_gauss_unit #(.LR_SHIFT(LR_SHIFT)) u_pgu (
    .clk, .rst_n, .mapping, .pose_load, .pose_init, .pose_update, .dldp, .pose,
    .in_valid(pg_in_valid), .in_grad(pe_og[po_sel]), .in_ready(pg_in_ready),
    .out_valid(go_valid), .out_data(go_data), .out_upd(go_upd), .out_ready(go_ready)
  );

  // ---- drain detection ---------------------------------------------------------------------
  always_comb begin
    drain_idle = !disp_busy && !sb_busy && !mt_busy && !go_valid && !ev_valid;
    for (int i = 0; i < NRE; i++)  drain_idle &= re_ready[i] && !ro_valid[i];
    for (int m = 0; m < NGMU; m++) drain_idle &= !gmu_busy[m];
    for (int p = 0; p < NPE; p++)  drain_idle &= !pe_busy[p];
  end
endmodule
