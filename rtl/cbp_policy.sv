// cbp_policy: the copy-back predictor of one cache, i.e. its metadata store
// plus the replacement and copy-back decision for the set being accessed.
//
// Storage: for each line a 4-bit private reuse distance rd, a 2-bit hit
// counter and a prefetched bit (the 7 bits per line of the paper); for each
// set a 4-bit shared RD, a 7-bit RDsum and a 3-bit RDcounter. cbp_rd_update
// gives the reuse-distance update (Algorithm 1), cbp_priority and
// cbp_victim_select the replacement decision (Algorithm 2).
//
// Interface and timing: idx names the set; the valid and dirty bits of that
// set come from the cache's tag array. The decision outputs (found, victim,
// victim_prio, copyback) are combinational from idx and the stored state.
// On a clock edge, for set idx:
//   ev = EV_MISS / EV_HIT  applies Algorithm 1 (hit_way names the hit line);
//                          a hit also advances the hit line's counter
//   replace                clears the hit counters of the set: the paper's
//                          counters count hits "since the last replacement
//                          of a cache set"
//   fill                   initialises line fill_way: rd = 0, hits = 0,
//                          prefetched = fill_prefetched
// The three may be given together; fill is applied last.
module cbp_policy
  import cbp_pkg::*;
#(
  parameter int unsigned SETS      = 64,
  parameter int unsigned WAYS      = 8,
  parameter int unsigned THRESHOLD = CB_THRESHOLD
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic [$clog2(SETS)-1:0] idx,
  input  logic [WAYS-1:0]         valid,
  input  logic [WAYS-1:0]         dirty,
  input  rd_event_e               ev,
  input  logic [$clog2(WAYS)-1:0] hit_way,
  input  logic                    replace,
  input  logic                    fill,
  input  logic [$clog2(WAYS)-1:0] fill_way,
  input  logic                    fill_prefetched,
  output logic                    found,
  output logic [$clog2(WAYS)-1:0] victim,
  output prio_t                   victim_prio,
  output logic                    copyback,
  output rd_t                     set_RD
);

  line_meta_t meta  [SETS][WAYS];
  set_meta_t  smeta [SETS];

  line_meta_t cur      [WAYS];
  rd_t        rd_cur   [WAYS];
  rd_t        rd_nxt   [WAYS];
  set_meta_t  set_nxt;
  prio_t      prio     [WAYS];

  always_comb begin
    for (int w = 0; w < WAYS; w++) begin
      cur[w]    = meta[idx][w];
      rd_cur[w] = meta[idx][w].rd;
    end
  end
  assign set_RD = smeta[idx].RD;

  cbp_rd_update #(.WAYS(WAYS)) u_rd (
    .ev      (ev),
    .hit_way (hit_way),
    .valid   (valid),
    .rd_cur  (rd_cur),
    .set_cur (smeta[idx]),
    .rd_nxt  (rd_nxt),
    .set_nxt (set_nxt)
  );

  cbp_priority #(.WAYS(WAYS)) u_prio (
    .valid (valid),
    .meta  (cur),
    .RD    (smeta[idx].RD),
    .prio  (prio)
  );

  cbp_victim_select #(.WAYS(WAYS), .THRESHOLD(THRESHOLD)) u_vs (
    .valid       (valid),
    .dirty       (dirty),
    .prio        (prio),
    .found       (found),
    .victim      (victim),
    .victim_prio (victim_prio),
    .copyback    (copyback)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < SETS; s++) begin
        smeta[s] <= '0;
        for (int w = 0; w < WAYS; w++) meta[s][w] <= '0;
      end
    end else begin
      if (ev != EV_NONE) smeta[idx] <= set_nxt;
      for (int w = 0; w < WAYS; w++) begin
        line_meta_t m;
        m    = cur[w];
        m.rd = rd_nxt[w];
        if (ev == EV_HIT && hit_way == ($clog2(WAYS))'(w) && m.hits != '1)
          m.hits = m.hits + 1'b1;
        if (replace) m.hits = '0;
        if (fill && fill_way == ($clog2(WAYS))'(w)) begin
          m.rd         = '0;
          m.hits       = '0;
          m.prefetched = fill_prefetched;
        end
        meta[idx][w] <= m;
      end
    end
  end

endmodule
