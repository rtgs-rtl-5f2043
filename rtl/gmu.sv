// gmu: Gradient Merging Unit.
//
// Merges, within one subtile round, the fragment gradients that belong to the
// same 2D Gaussian before they reach the Stage Buffer, so that gradients of a
// Gaussian are added on chip instead of by conflicting atomic adds. One GMU
// serves a group of NIN = 4 Rendering Engines; it takes one 16-lane gradient
// vector per cycle from them (round robin) and pipelines the REs' vectors
// behind each other, as the paper's grouped, pipelined aggregation does.
// Pipeline (one vector per cycle, 6 register stages):
//   s0   selected input vector
//   s1   configurator + permutation network: lanes with equal Gaussian id
//        are moved next to each other, clusters ordered by first appearance,
//        invalid lanes moved to the end
//   s2-5 segmented reduction, distances 1, 2, 4, 8: each lane adds the lane
//        d to its left unless a cluster boundary lies between them
//   out  the last lane of each cluster holds the cluster sum; only those
//        lanes leave valid, into the stage queue (SQ_DEPTH vectors)
// Departures: the paper uses a Benes network routed by the configurator and
// the adder-switch reduction tree with bypass links and N-to-2 muxes of
// SIGMA. Here the permutation is written as a full crossbar driven by the
// configurator's destination indices, and the clustered reduction as a
// segmented scan; both give the same merged sums. Input is accepted only
// while the stage queue has room for everything in flight.
module gmu import rtgs_pkg::*; #(
  parameter int NIN      = 4,
  parameter int SQ_DEPTH = 8
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid [NIN],
  input  gradvec_t in_vec   [NIN],
  output logic     in_ready [NIN],
  output logic     out_valid,
  output gradvec_t out_vec,
  input  logic     out_ready,
  output logic     busy
);
  localparam int NL  = NPIX;
  localparam int NLV = $clog2(NL);
  localparam int SW  = $clog2(NIN) > 0 ? $clog2(NIN) : 1;

  // ---- arbiter ---------------------------------------------------------------
  logic [SW-1:0] rr, sel;
  logic          any, acc;
  logic [NLV+2:0] infl;
  logic [$clog2(SQ_DEPTH+1)-1:0] q_cnt;
  logic          q_full, q_empty;

  always_comb begin
    any = 1'b0; sel = rr;
    for (int k = NIN-1; k >= 0; k--) begin
      logic [SW-1:0] j;
      j = SW'((32'(rr) + k) % NIN);
      if (in_valid[j]) begin any = 1'b1; sel = j; end
    end
    acc = any && ((32'(q_cnt) + 32'(infl)) < SQ_DEPTH);
    for (int i = 0; i < NIN; i++) in_ready[i] = acc && (sel == SW'(i));
  end

  // ---- pipeline registers ------------------------------------------------------
  logic     v    [NLV+2];
  gradvec_t d    [NLV+2];
  logic [NL-1:0] hd [NLV+2];   // cluster start flags (after permutation)
  logic [NL-1:0] sf [NLV+2];   // segmented-scan flags

  // ---- configurator: destination of each lane ------------------------------------
  logic [NLV-1:0] first [NL];
  logic [NLV:0]   dest  [NL];
  logic [NLV:0]   nvalid;
  always_comb begin
    nvalid = '0;
    for (int i = 0; i < NL; i++) if (d[0][i].valid) nvalid++;
    for (int i = 0; i < NL; i++) begin
      first[i] = NLV'(i);
      for (int j = NL-1; j >= 0; j--)
        if (j < i && d[0][j].valid && d[0][i].valid && d[0][j].gid == d[0][i].gid) first[i] = NLV'(j);
    end
    for (int i = 0; i < NL; i++) begin
      dest[i] = '0;
      if (d[0][i].valid) begin
        for (int j = 0; j < NL; j++)
          if (d[0][j].valid && (first[j] < first[i] || (first[j] == first[i] && j < i))) dest[i]++;
      end else begin
        dest[i] = nvalid;
        for (int j = 0; j < i; j++) if (!d[0][j].valid) dest[i]++;
      end
    end
  end

  // ---- permutation (crossbar) ------------------------------------------------------
  gradvec_t      perm;
  logic [NL-1:0] perm_hd;
  // written as a gather: output lane j takes the input lane whose destination
  // is j (destinations are a permutation, so exactly one matches)
  always_comb begin
    for (int j = 0; j < NL; j++) begin
      perm[j] = '0; perm_hd[j] = 1'b0;
      for (int i = 0; i < NL; i++)
        if (dest[i][NLV-1:0] == NLV'(j)) begin
          perm[j]    = d[0][i];
          perm_hd[j] = !d[0][i].valid || (first[i] == NLV'(i));
        end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rr <= '0;
      for (int s = 0; s < NLV+2; s++) begin v[s] <= 1'b0; d[s] <= '0; hd[s] <= '0; sf[s] <= '0; end
    end else begin
      if (acc) rr <= SW'((32'(sel) + 1) % NIN);
      v[0] <= acc;
      d[0] <= acc ? in_vec[sel] : '0;
      v[1] <= v[0]; d[1] <= perm; hd[1] <= perm_hd; sf[1] <= perm_hd;
      for (int l = 0; l < NLV; l++) begin
        v[l+2]  <= v[l+1];
        hd[l+2] <= hd[l+1];
        for (int i = 0; i < NL; i++) begin
          d[l+2][i] <= d[l+1][i];
          if (i >= (1 << l)) begin
            sf[l+2][i] <= sf[l+1][i] | sf[l+1][i - (1 << l)];
            for (int g = 0; g < NG; g++)
              d[l+2][i].g[g] <= d[l+1][i].g[g] + (sf[l+1][i] ? '0 : d[l+1][i - (1 << l)].g[g]);
          end else begin
            sf[l+2][i] <= 1'b1;
          end
        end
      end
    end
  end

  // ---- cluster tails -> stage queue -------------------------------------------------
  gradvec_t merged;
  always_comb begin
    merged = d[NLV+1];
    for (int i = 0; i < NL; i++) begin
      logic tail;
      tail = (i == NL-1) ? 1'b1 : (hd[NLV+1][i+1] || !d[NLV+1][i+1].valid);
      merged[i].valid = d[NLV+1][i].valid && tail;
    end
  end

  always_comb begin
    infl = '0;
    for (int s = 0; s < NLV+2; s++) if (v[s]) infl++;
  end

  sync_fifo #(.T(gradvec_t), .DEPTH(SQ_DEPTH)) u_sq (
    .clk, .rst_n, .push(v[NLV+1]), .din(merged), .pop(out_ready), .dout(out_vec),
    .full(q_full), .empty(q_empty), .count(q_cnt)
  );
  assign out_valid = !q_empty;
  assign busy      = (infl != 0) || !q_empty;

  a_sq_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) v[NLV+1] |-> !q_full);
endmodule
