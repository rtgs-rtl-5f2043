// wsu: Workload Scheduling Unit of a Rendering Engine.
//
// Pixel-level pairwise scheduling. At the start of a subtile the WSU hands
// each of the 8 Rendering Cores its pixel pair: the pairing recorded for this
// subtile in the previous iteration (cfg_in, from the WSU buffer) or, on the
// first visit, adjacent pixels (2i, 2i+1). While the subtile renders, the RCs
// report each finished pixel (term_*). The first 8 completions - the light
// pixels - are pushed into a FIFO, the next 8 - the heavy pixels - into a
// LIFO, both in completion order. The configuration unit then pops both
// queues together, one pair per cycle: the FIFO gives the lightest remaining
// pixel and the LIFO the heaviest, so pair i = (i-th lightest, i-th heaviest).
// The 8 pairs form the configuration table (cfg_out) used for the same
// subtile in the next iteration. Completions in one cycle are recorded in RC
// order. cfg_out_valid pulses 8 cycles after the 16th completion.
// The queue assignment (light -> FIFO, heavy -> LIFO) follows the text; the
// block diagram labels them the other way round, which gives the same pairs.
module wsu import rtgs_pkg::*; (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic             cfg_in_valid,
  input  pair_cfg_t        cfg_in,
  output pair_cfg_t        pairs,
  input  logic [1:0]       term_valid [NPAIR],
  input  logic [PIX_W-1:0] term_pix   [NPAIR][2],
  output pair_cfg_t        cfg_out,
  output logic             cfg_out_valid
);
  localparam int QD = NPIX/2;

  logic [PIX_W-1:0] fifo_mem [QD];
  logic [PIX_W-1:0] lifo_mem [QD];
  logic [3:0]       fifo_wp, fifo_rp, lifo_sp;
  logic             popping;
  logic [3:0]       pop_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pairs <= default_pairs();
      cfg_out <= default_pairs();
      cfg_out_valid <= 1'b0;
      fifo_wp <= '0; fifo_rp <= '0; lifo_sp <= '0; popping <= 1'b0; pop_i <= '0;
      for (int i = 0; i < QD; i++) begin fifo_mem[i] <= '0; lifo_mem[i] <= '0; end
    end else begin
      cfg_out_valid <= 1'b0;
      if (start) begin
        pairs   <= cfg_in_valid ? cfg_in : default_pairs();
        fifo_wp <= '0; fifo_rp <= '0; lifo_sp <= '0; popping <= 1'b0; pop_i <= '0;
      end else begin
        // record completion order
        logic [3:0] wp, sp;
        wp = fifo_wp; sp = lifo_sp;
        for (int r = 0; r < NPAIR; r++)
          for (int s = 0; s < 2; s++)
            if (term_valid[r][s]) begin
              if (32'(wp) < QD) begin
                fifo_mem[wp[2:0]] <= term_pix[r][s];
                wp = wp + 1'b1;
              end else if (32'(sp) < QD) begin
                lifo_mem[sp[2:0]] <= term_pix[r][s];
                sp = sp + 1'b1;
              end
            end
        fifo_wp <= wp;
        lifo_sp <= sp;
        if (!popping && 32'(wp) == QD && 32'(sp) == QD && pop_i == 0) popping <= 1'b1;
        // configuration unit: pop FIFO head and LIFO top together
        if (popping) begin
          cfg_out[pop_i[2:0]].a <= fifo_mem[fifo_rp[2:0]];
          cfg_out[pop_i[2:0]].b <= lifo_mem[3'(lifo_sp - 1'b1)];
          fifo_rp <= fifo_rp + 1'b1;
          lifo_sp <= lifo_sp - 1'b1;
          pop_i   <= pop_i + 1'b1;
          if (32'(pop_i) == QD-1) begin
            popping <= 1'b0;
            cfg_out_valid <= 1'b1;
          end
        end
      end
    end
  end
endmodule
