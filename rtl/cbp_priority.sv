// cbp_priority: replacement priority of every line in one set (lines 2-15 of
// Algorithm 2 of the copy-back predictor), purely combinational.
//
// Each valid line starts at 0, gains 1 if it was prefetched, 1 if its hit
// counter is at most 1, 4 if 2*RD <= rd <= 3*RD and 8 if rd > 3*RD. The
// weights, the comparisons and the hit threshold follow the paper. Invalid
// lines get priority 0 (the paper only visits valid lines); the victim
// selector ignores them anyway.
module cbp_priority
  import cbp_pkg::*;
#(
  parameter int unsigned WAYS = 8
) (
  input  logic [WAYS-1:0] valid,
  input  line_meta_t      meta [WAYS],
  input  rd_t             RD,
  output prio_t           prio [WAYS]
);

  // 2*RD and 3*RD need two extra bits
  logic [RD_W+1:0] rd2, rd3;
  assign rd2 = (RD_W+2)'(RD) << 1;
  assign rd3 = (RD_W+2)'(RD) + rd2;

  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      logic [RD_W+1:0] r;
      r = (RD_W+2)'(meta[w].rd);
      prio[w] = '0;
      if (valid[w]) begin
        if (meta[w].prefetched)                     prio[w] += PRIO_W'(W_PREFETCH);
        if (meta[w].hits <= HC_W'(LOWFREQ_MAX_HITS)) prio[w] += PRIO_W'(W_LOWFREQ);
        if (r >= rd2 && r <= rd3)                   prio[w] += PRIO_W'(W_RD_MID);
        else if (r > rd3)                           prio[w] += PRIO_W'(W_RD_FAR);
      end
    end
  end

endmodule
