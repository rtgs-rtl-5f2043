// stage_buffer: Stage Buffer, Gaussian-level gradient accumulation.
//
// Takes the merged (tile-level) gradient vectors that the GMUs leave in their
// stage queues and accumulates them per Gaussian, completing the
// inter-subtile part of the aggregation. A serializer takes one vector at a
// time from the NQ stage queues (round robin) and one valid record per cycle
// from it. The buffer is a direct-mapped table of 2^IDX_W entries indexed by
// the low Gaussian-id bits:
//   empty entry         -> the record is installed
//   same Gaussian       -> the record is added (read-modify-write)
//   another Gaussian    -> the old entry is evicted to the PEs (ev_*) and
//                          the record takes its place
// flush (end of an iteration) evicts every valid entry and pulses flush_done.
// Evicting a partial sum is safe because everything downstream is linear in
// the 2D gradients (the 3D and pose gradients are sums over records).
// The paper evicts an entry once all its gradients are in or its next use is
// far ahead in the execution order; this design has no per-Gaussian schedule
// and evicts on conflict and at flush instead. 512 entries of 34 bytes is the
// closest power of two to the paper's 16 KB.
// Eviction handshake ev_valid/ev_ready; a conflict stalls until accepted.
module stage_buffer import rtgs_pkg::*; #(
  parameter int NQ    = 4,
  parameter int IDX_W = 9
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     sq_valid [NQ],
  input  gradvec_t sq_vec   [NQ],
  output logic     sq_pop   [NQ],
  input  logic     flush,
  output logic     flush_done,
  output logic     ev_valid,
  output grad2d_t  ev_rec,
  input  logic     ev_ready,
  output logic     ev_conflict,     // pulses when a conflict eviction happens
  output logic     busy
);
  localparam int N  = 1 << IDX_W;
  localparam int SW = $clog2(NQ) > 0 ? $clog2(NQ) : 1;

  logic              tv   [N];
  gid_t              tgid [N];
  fx_t [NG-1:0]      tacc [N];

  gradvec_t          cur;
  logic [NPIX-1:0]   mask;
  logic [SW-1:0]     rr;
  logic              flushing;
  logic [IDX_W:0]    fidx;

  // lowest pending lane of the current vector
  logic              have;
  logic [PIX_W-1:0]  lane;
  always_comb begin
    have = 1'b0; lane = '0;
    for (int i = NPIX-1; i >= 0; i--) if (mask[i]) begin have = 1'b1; lane = PIX_W'(i); end
  end

  grad2d_t          r;
  logic [IDX_W-1:0] ix;
  logic             hit, conflict, proc;
  logic [IDX_W-1:0] fix;
  assign r        = cur[lane];
  assign ix       = r.gid[IDX_W-1:0];
  assign hit      = tv[ix] && tgid[ix] == r.gid;
  assign conflict = tv[ix] && !hit;
  assign fix      = fidx[IDX_W-1:0];
  assign proc     = have && !flushing && (!conflict || ev_ready);

  // eviction port
  always_comb begin
    ev_valid = 1'b0; ev_rec = '0;
    if (flushing && !fidx[IDX_W] && tv[fix]) begin
      ev_valid = 1'b1;
      ev_rec   = '{valid: 1'b1, gid: tgid[fix], g: tacc[fix]};
    end else if (have && !flushing && conflict) begin
      ev_valid = 1'b1;
      ev_rec   = '{valid: 1'b1, gid: tgid[ix], g: tacc[ix]};
    end
  end
  assign ev_conflict = have && !flushing && conflict && ev_ready;

  // load the next vector when the current one is finished
  logic          need, take;
  logic [SW-1:0] qsel;
  always_comb begin
    need = !have || (proc && (mask & ~(NPIX'(1) << lane)) == '0);
    take = 1'b0; qsel = rr;
    for (int k = NQ-1; k >= 0; k--) begin
      logic [SW-1:0] j;
      j = SW'((32'(rr) + k) % NQ);
      if (sq_valid[j]) begin take = 1'b1; qsel = j; end
    end
    take = take && need && !flushing;
    for (int q = 0; q < NQ; q++) sq_pop[q] = take && (qsel == SW'(q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cur <= '0; mask <= '0; rr <= '0; flushing <= 1'b0; fidx <= '0; flush_done <= 1'b0;
      for (int e = 0; e < N; e++) tv[e] <= 1'b0;
    end else begin
      flush_done <= 1'b0;
      if (proc) begin
        mask[lane] <= 1'b0;
        tv[ix]     <= 1'b1;
      end
      if (take) begin
        cur <= sq_vec[qsel];
        for (int i = 0; i < NPIX; i++) mask[i] <= sq_vec[qsel][i].valid;
        rr  <= SW'((32'(qsel) + 1) % NQ);
      end
      if (flush && !flushing) begin
        flushing <= 1'b1; fidx <= '0;
      end else if (flushing) begin
        if (fidx[IDX_W]) begin
          flushing   <= 1'b0;
          flush_done <= 1'b1;
        end else if (!tv[fix] || ev_ready) begin
          tv[fix] <= 1'b0;
          fidx    <= fidx + 1'b1;
        end
      end
    end
  end

  // table contents: plain memory, one write port, no reset (tv marks validity)
  always_ff @(posedge clk)
    if (proc) begin
      tgid[ix] <= r.gid;
      for (int g = 0; g < NG; g++) tacc[ix][g] <= hit ? tacc[ix][g] + r.g[g] : r.g[g];
    end

  assign busy = have || flushing;
  a_flush_when_idle: assert property (@(posedge clk) disable iff (!rst_n) flush |-> !have);
endmodule
