// cbp_rd_update: next-state logic for the reuse-distance state of one set
// (Algorithm 1 of the copy-back predictor), purely combinational.
//
// On a miss in the set every valid line's private rd is incremented,
// saturating at 15. On a hit the hit line's rd is added to RDsum and cleared,
// and RDcounter is advanced; when it reaches 8 the set's shared RD becomes
// RDsum / 8 (a right shift by 3) and RDsum and RDcounter restart. The 4-bit
// saturating counters and the 8-hit interval follow the paper. A 3-bit
// RDcounter that wraps from 7 to 0 stands in for "reaches 8, then cleared".
//
// Interface: ev selects none / miss / hit, hit_way names the hit line,
// valid masks the lines rd may change on; line_d/set_d are the present
// state, line_q_nxt/set_q_nxt the state after the event.
module cbp_rd_update
  import cbp_pkg::*;
#(
  parameter int unsigned WAYS = 8
) (
  input  rd_event_e                  ev,
  input  logic [$clog2(WAYS)-1:0]    hit_way,
  input  logic [WAYS-1:0]            valid,
  input  rd_t                        rd_cur  [WAYS],
  input  set_meta_t                  set_cur,
  output rd_t                        rd_nxt  [WAYS],
  output set_meta_t                  set_nxt
);

  logic [RDSUM_W-1:0] sum_plus;
  assign sum_plus = set_cur.rdsum + RDSUM_W'(rd_cur[hit_way]);

  always_comb begin
    set_nxt = set_cur;
    for (int w = 0; w < WAYS; w++) rd_nxt[w] = rd_cur[w];
    unique case (ev)
      EV_MISS: begin
        for (int w = 0; w < WAYS; w++)
          if (valid[w] && rd_cur[w] != '1) rd_nxt[w] = rd_cur[w] + 1'b1;
      end
      EV_HIT: begin
        rd_nxt[hit_way] = '0;
        if (set_cur.rdcnt == RDCNT_W'(HITS_PER_RD_UPDATE - 1)) begin
          set_nxt.RD    = rd_t'(sum_plus >> $clog2(HITS_PER_RD_UPDATE));
          set_nxt.rdsum = '0;
          set_nxt.rdcnt = '0;
        end else begin
          set_nxt.rdsum = sum_plus;
          set_nxt.rdcnt = set_cur.rdcnt + 1'b1;
        end
      end
      default: ;
    endcase
  end

endmodule
