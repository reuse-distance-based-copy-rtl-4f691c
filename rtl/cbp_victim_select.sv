// cbp_victim_select: victim choice and copy-back decision of the copy-back
// predictor (lines 16-19 of Algorithm 2), purely combinational.
//
// The valid line with the highest priority is the victim. It is copied back
// to the next level if it is dirty or if its priority is below THRESHOLD
// (9 in the paper); a clean line at or above the threshold is predicted dead
// and dropped. Ties go to the lowest way number, which is this design's
// choice (the paper does not say). found is low when no line is valid.
module cbp_victim_select
  import cbp_pkg::*;
#(
  parameter int unsigned WAYS      = 8,
  parameter int unsigned THRESHOLD = CB_THRESHOLD
) (
  input  logic [WAYS-1:0]         valid,
  input  logic [WAYS-1:0]         dirty,
  input  prio_t                   prio [WAYS],
  output logic                    found,
  output logic [$clog2(WAYS)-1:0] victim,
  output prio_t                   victim_prio,
  output logic                    copyback
);

  always_comb begin
    found       = 1'b0;
    victim      = '0;
    victim_prio = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (valid[w] && (!found || prio[w] > victim_prio)) begin
        found       = 1'b1;
        victim      = ($clog2(WAYS))'(w);
        victim_prio = prio[w];
      end
    end
    copyback = found && (dirty[victim] || victim_prio < PRIO_W'(THRESHOLD));
  end

endmodule
