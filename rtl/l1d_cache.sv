// l1d_cache: write-back, write-allocate L1 data cache (32 KB, 8-way, 64-byte
// lines by default) whose replacement and clean-line copy-back are decided by
// the reuse-distance copy-back predictor (cbp_policy).
//
// Operation. One request is handled at a time. A demand access (from the
// core) or a prefetch (from the prefetcher, lower priority) is taken in
// IDLE and looked up in LOOKUP one cycle later. A demand hit updates the CBP
// state (rd of the line cleared, RD bookkeeping, hit counter) and answers in
// that cycle; a prefetch that hits is dropped. On a miss the rd of every
// valid line of the set is advanced (demand misses only), then VICTIM picks
// a way: a free way if the set has one, otherwise the highest-priority line
// from CBP. A victim that is dirty, or clean with priority below 9, is
// copied back to the L2 (COPYBACK) and only then invalidated; a clean victim
// at 9 or above is dropped. FETCH then asks the L2 for the line and WAIT
// installs it (with the prefetched bit for prefetches) and answers a demand
// request. The L2 is exclusive: a line handed up may be dirty and stays so.
//
// Interfaces: cpu_req_* / cpu_resp_* is the core's 64-bit load/store port
// (aligned words, byte strobes; every demand request gets one response);
// pf_* takes prefetch addresses; l2_req_* / l2_resp_* is the valid/ready
// channel to the L2. Counters report hits, misses, copy-backs (clean and
// dirty lines sent down) and clean lines dropped.
//
// Timing: a hit answers 2 cycles after the request is taken. The paper gives
// no L1 latency, the port protocol or the state machine; these, the
// demand-over-prefetch priority and "prefetch hits are dropped" are this
// design's choices.
module l1d_cache
  import cbp_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 32768,
  parameter int unsigned WAYS       = 8,
  parameter int unsigned THRESHOLD  = CB_THRESHOLD
) (
  input  logic     clk,
  input  logic     rst_n,
  // core port
  input  logic     cpu_req_valid,
  output logic     cpu_req_ready,
  input  logic     cpu_req_we,
  input  paddr_t   cpu_req_addr,
  input  word_t    cpu_req_wdata,
  input  logic [WORD_W/8-1:0] cpu_req_wstrb,
  output logic     cpu_resp_valid,
  output word_t    cpu_resp_rdata,
  // prefetcher port
  input  logic     pf_valid,
  output logic     pf_ready,
  input  paddr_t   pf_addr,
  // L2 port
  output logic     l2_req_valid,
  input  logic     l2_req_ready,
  output l2_req_t  l2_req,
  input  logic     l2_resp_valid,
  input  l2_resp_t l2_resp,
  // statistics
  output logic [31:0] cnt_hits,
  output logic [31:0] cnt_misses,
  output logic [31:0] cnt_copybacks,
  output logic [31:0] cnt_drops
);

  localparam int unsigned SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_W = LADDR_W - IDX_W;
  localparam int unsigned WSEL_W = $clog2(LINE_W / WORD_W);

  typedef enum logic [2:0] {
    S_IDLE, S_LOOKUP, S_VICTIM, S_COPYBACK, S_FETCH, S_WAIT
  } state_e;

  state_e state;

  // arrays
  logic [TAG_W-1:0] tags  [SETS][WAYS];
  line_t            data  [SETS][WAYS];
  logic [WAYS-1:0]  valid [SETS];
  logic [WAYS-1:0]  dirty [SETS];

  // latched request
  logic             r_we, r_pf;
  paddr_t           r_addr;
  word_t            r_wdata;
  logic [WORD_W/8-1:0] r_wstrb;
  logic [WAY_W-1:0] r_way;

  laddr_t           r_laddr;
  logic [IDX_W-1:0] r_idx;
  logic [TAG_W-1:0] r_tag;
  logic [WSEL_W-1:0] r_wsel;
  assign r_laddr = r_addr[PADDR_W-1:OFFS_W];
  assign r_idx   = r_laddr[IDX_W-1:0];
  assign r_tag   = r_laddr[LADDR_W-1:IDX_W];
  assign r_wsel  = r_addr[OFFS_W-1:$clog2(WORD_W/8)];

  // tag match
  logic             hit;
  logic [WAY_W-1:0] hit_way;
  always_comb begin
    hit = 1'b0;
    hit_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid[r_idx][w] && tags[r_idx][w] == r_tag) begin
        hit = 1'b1;
        hit_way = WAY_W'(w);
      end
  end

  // first free way
  logic             has_free;
  logic [WAY_W-1:0] free_way;
  always_comb begin
    has_free = 1'b0;
    free_way = '0;
    for (int w = WAYS-1; w >= 0; w--)
      if (!valid[r_idx][w]) begin
        has_free = 1'b1;
        free_way = WAY_W'(w);
      end
  end

  // copy-back predictor
  rd_event_e        pol_ev;
  logic             pol_replace, pol_fill;
  logic             pol_found, pol_cb;
  logic [WAY_W-1:0] pol_victim;

  always_comb begin
    pol_ev = EV_NONE;
    if (state == S_LOOKUP && !r_pf) pol_ev = hit ? EV_HIT : EV_MISS;
  end
  assign pol_replace = (state == S_VICTIM) && !has_free;
  assign pol_fill    = (state == S_WAIT) && l2_resp_valid;

  cbp_policy #(.SETS(SETS), .WAYS(WAYS), .THRESHOLD(THRESHOLD)) u_cbp (
    .clk, .rst_n,
    .idx             (r_idx),
    .valid           (valid[r_idx]),
    .dirty           (dirty[r_idx]),
    .ev              (pol_ev),
    .hit_way         (hit_way),
    .replace         (pol_replace),
    .fill            (pol_fill),
    .fill_way        (r_way),
    .fill_prefetched (r_pf),
    .found           (pol_found),
    .victim          (pol_victim),
    .victim_prio     (),
    .copyback        (pol_cb),
    .set_RD          ()
  );

  // store merge into a line
  function automatic line_t merge(input line_t l, input logic [WSEL_W-1:0] ws,
                                  input word_t wd, input logic [WORD_W/8-1:0] st);
    line_t o;
    o = l;
    for (int b = 0; b < WORD_W/8; b++)
      if (st[b]) o[int'(ws)*WORD_W + b*8 +: 8] = wd[b*8 +: 8];
    return o;
  endfunction

  assign cpu_req_ready = (state == S_IDLE);
  assign pf_ready      = (state == S_IDLE) && !cpu_req_valid;

  always_comb begin
    l2_req_valid = 1'b0;
    l2_req       = '0;
    if (state == S_COPYBACK) begin
      l2_req_valid = 1'b1;
      l2_req.op    = L2_COPYBACK;
      l2_req.addr  = {tags[r_idx][r_way], r_idx};
      l2_req.data  = data[r_idx][r_way];
      l2_req.dirty = dirty[r_idx][r_way];
    end else if (state == S_FETCH) begin
      l2_req_valid = 1'b1;
      l2_req.op    = L2_READ;
      l2_req.addr  = r_laddr;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= S_IDLE;
      r_we           <= 1'b0;
      r_pf           <= 1'b0;
      r_addr         <= '0;
      r_wdata        <= '0;
      r_wstrb        <= '0;
      r_way          <= '0;
      cpu_resp_valid <= 1'b0;
      cpu_resp_rdata <= '0;
      cnt_hits       <= '0;
      cnt_misses     <= '0;
      cnt_copybacks  <= '0;
      cnt_drops      <= '0;
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        dirty[s] <= '0;
      end
    end else begin
      cpu_resp_valid <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (cpu_req_valid) begin
            r_we    <= cpu_req_we;
            r_pf    <= 1'b0;
            r_addr  <= cpu_req_addr;
            r_wdata <= cpu_req_wdata;
            r_wstrb <= cpu_req_wstrb;
            state   <= S_LOOKUP;
          end else if (pf_valid) begin
            r_we    <= 1'b0;
            r_pf    <= 1'b1;
            r_addr  <= pf_addr;
            state   <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          if (hit) begin
            if (!r_pf) begin
              cnt_hits       <= cnt_hits + 1;
              cpu_resp_valid <= 1'b1;
              cpu_resp_rdata <= data[r_idx][hit_way][int'(r_wsel)*WORD_W +: WORD_W];
              if (r_we) begin
                data[r_idx][hit_way]  <= merge(data[r_idx][hit_way], r_wsel, r_wdata, r_wstrb);
                dirty[r_idx][hit_way] <= 1'b1;
              end
            end
            state <= S_IDLE;
          end else begin
            if (!r_pf) cnt_misses <= cnt_misses + 1;
            state <= S_VICTIM;
          end
        end
        S_VICTIM: begin
          if (has_free) begin
            r_way <= free_way;
            state <= S_FETCH;
          end else begin
            r_way <= pol_victim;
            if (pol_cb) begin
              state <= S_COPYBACK;
            end else begin
              valid[r_idx][pol_victim] <= 1'b0;   // predicted dead: drop
              cnt_drops <= cnt_drops + 1;
              state <= S_FETCH;
            end
          end
        end
        S_COPYBACK: begin
          if (l2_req_ready) begin
            valid[r_idx][r_way] <= 1'b0;          // evict after copy-back
            cnt_copybacks <= cnt_copybacks + 1;
            state <= S_FETCH;
          end
        end
        S_FETCH: begin
          if (l2_req_ready) state <= S_WAIT;
        end
        S_WAIT: begin
          if (l2_resp_valid) begin
            tags[r_idx][r_way]  <= r_tag;
            valid[r_idx][r_way] <= 1'b1;
            if (!r_pf && r_we) begin
              data[r_idx][r_way]  <= merge(l2_resp.data, r_wsel, r_wdata, r_wstrb);
              dirty[r_idx][r_way] <= 1'b1;
            end else begin
              data[r_idx][r_way]  <= l2_resp.data;
              dirty[r_idx][r_way] <= l2_resp.dirty;
            end
            if (!r_pf) begin
              cpu_resp_valid <= 1'b1;
              cpu_resp_rdata <= l2_resp.data[int'(r_wsel)*WORD_W +: WORD_W];
            end
            state <= S_IDLE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // the victim decision is only used when the set is full
  a_victim_found: assert property (@(posedge clk) disable iff (!rst_n)
    state == S_VICTIM && !has_free |-> pol_found);

  // valid/ready rule: a request is held unchanged until taken
  property p_l2_hold;
    @(posedge clk) disable iff (!rst_n)
      l2_req_valid && !l2_req_ready |=> l2_req_valid && $stable(l2_req);
  endproperty
  a_l2_hold: assert property (p_l2_hold);

endmodule
