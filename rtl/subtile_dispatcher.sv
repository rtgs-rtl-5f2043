// subtile_dispatcher: inter-RE subtile streaming and the WSU buffer.
//
// On start it streams subtiles 0 .. n_st-1 (descriptors read from the
// Gaussian cache) to the Rendering Engines: each subtile goes to the
// lowest-numbered RE that is free, so REs run asynchronously and an RE with a
// light subtile simply takes the next one. With each subtile it sends the
// pixel pairing recorded for it in the previous iteration (cfg table indexed
// by the global subtile id; cfg_valid low on a first visit). When an RE
// finishes it returns the new pairing, which is written back. clr_cfg
// forgets all pairings (new frame: new sorting, new workloads). The table of
// NCFG = 2048 pairings of 8 bytes is the paper's 16 KB WSU buffer.
// done pulses once all subtiles are dispatched and finished.
module subtile_dispatcher import rtgs_pkg::*; #(
  parameter int NRE  = 16,
  parameter int NCFG = 2048
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic [15:0] n_st,
  input  logic        clr_cfg,
  output logic [15:0] st_addr,
  input  subtile_t    st_data,
  input  logic        re_ready [NRE],
  output logic        re_valid [NRE],
  output subtile_t    re_desc,
  output logic        re_cfg_valid,
  output pair_cfg_t   re_cfg,
  input  logic        re_done   [NRE],
  input  logic [15:0] re_done_id[NRE],
  input  pair_cfg_t   re_done_cfg[NRE],
  output logic        done,
  output logic        cfg_hit,       // a dispatched subtile reused a pairing
  output logic        busy
);
  localparam int CW = $clog2(NCFG);

  pair_cfg_t     cfg_mem [NCFG];
  logic [NCFG-1:0] cfg_v;
  logic          running;
  logic [15:0]   idx, ndone;

  logic          free;
  logic [$clog2(NRE)-1:0] pick;
  always_comb begin
    free = 1'b0; pick = '0;
    for (int i = NRE-1; i >= 0; i--) if (re_ready[i]) begin free = 1'b1; pick = $clog2(NRE)'(i); end
  end

  logic issue;
  logic [CW-1:0] cix;
  assign st_addr      = idx;
  assign issue        = running && idx < n_st && free;
  assign cix          = st_data.st_id[CW-1:0];
  assign re_desc      = st_data;
  assign re_cfg       = cfg_mem[cix];
  assign re_cfg_valid = cfg_v[cix];
  always_comb for (int i = 0; i < NRE; i++) re_valid[i] = issue && pick == $clog2(NRE)'(i);
  assign cfg_hit = issue && cfg_v[cix];

  // WSU buffer contents: plain memory without reset (cfg_v marks validity)
  always_ff @(posedge clk)
    for (int i = 0; i < NRE; i++)
      if (re_done[i]) cfg_mem[re_done_id[i][CW-1:0]] <= re_done_cfg[i];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0; idx <= '0; ndone <= '0; done <= 1'b0; cfg_v <= '0;
    end else begin
      logic [15:0] nd;
      done <= 1'b0;
      if (clr_cfg) cfg_v <= '0;
      nd = ndone;
      for (int i = 0; i < NRE; i++)
        if (re_done[i]) begin
          cfg_v[re_done_id[i][CW-1:0]]   <= 1'b1;
          nd = nd + 1'b1;
        end
      ndone <= nd;
      if (start) begin
        running <= 1'b1; idx <= '0; ndone <= '0;
      end else if (running) begin
        if (issue) idx <= idx + 1'b1;
        if (idx == n_st && nd == n_st) begin
          running <= 1'b0; done <= 1'b1;
        end
      end
    end
  end
  assign busy = running;
endmodule
