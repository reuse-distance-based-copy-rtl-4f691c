// l2_arbiter: lets the L1 data cache (port d) and the L1 instruction cache
// (port i) share the single request channel of the L2.
//
// Round-robin between the two when both ask in the same cycle; once a
// request is shown to the L2 and not yet taken the choice is held, so the
// downstream valid/ready rule is kept. The L2 serves one request at a time
// and answers only READs, so the arbiter remembers which port issued the
// last READ taken and steers the next response there. The paper says only
// that the L2 is shared; the round-robin policy and the response steering
// are this design's choices. It is a combinational switch with no
// buffering, so it adds no cycle of latency.
module l2_arbiter
  import cbp_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  // data-cache side
  input  logic     d_req_valid,
  output logic     d_req_ready,
  input  l2_req_t  d_req,
  output logic     d_resp_valid,
  // instruction-cache side
  input  logic     i_req_valid,
  output logic     i_req_ready,
  input  l2_req_t  i_req,
  output logic     i_resp_valid,
  // shared response data
  output l2_resp_t resp,
  // to the L2
  output logic     l2_req_valid,
  input  logic     l2_req_ready,
  output l2_req_t  l2_req,
  input  logic     l2_resp_valid,
  input  l2_resp_t l2_resp
);

  logic last_i;      // the I side won the last arbitration
  logic hold, hold_i;
  logic sel_i;       // the I side is shown to the L2 this cycle
  logic resp_i;      // the pending response belongs to the I side

  always_comb begin
    if (hold)                          sel_i = hold_i;
    else if (d_req_valid && i_req_valid) sel_i = !last_i;
    else                               sel_i = i_req_valid;
  end

  assign l2_req_valid = sel_i ? i_req_valid : d_req_valid;
  assign l2_req       = sel_i ? i_req : d_req;
  assign d_req_ready  = !sel_i && l2_req_ready;
  assign i_req_ready  =  sel_i && l2_req_ready;

  assign resp         = l2_resp;
  assign d_resp_valid = l2_resp_valid && !resp_i;
  assign i_resp_valid = l2_resp_valid &&  resp_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_i <= 1'b0;
      hold   <= 1'b0;
      hold_i <= 1'b0;
      resp_i <= 1'b0;
    end else begin
      hold   <= l2_req_valid && !l2_req_ready;
      hold_i <= sel_i;
      if (l2_req_valid && l2_req_ready) begin
        last_i <= sel_i;
        if (l2_req.op == L2_READ) resp_i <= sel_i;
      end
    end
  end

  a_req_hold: assert property (@(posedge clk) disable iff (!rst_n)
    l2_req_valid && !l2_req_ready |=> l2_req_valid && $stable(l2_req));

endmodule
