// l2_cache: shared last-level cache, exclusive of the L1s above it, with an
// STT-MRAM data array (1 MB, 16-way, 64-byte lines, LRU by default).
//
// Exclusive operation. A READ from an L1 that hits is read from the array
// (10 cycles), handed up together with its dirty bit and invalidated here,
// so no line lives in both levels. A READ that misses is fetched from DRAM
// and handed up without being allocated here. A COPYBACK brings a victim
// line down from an L1: it is allocated in a free way or in the LRU way;
// a dirty line in that way is first read out and written to DRAM, a clean
// one is overwritten. The array write then keeps the array busy for 40
// cycles, during which later array accesses wait: this is the write
// congestion of STT-MRAM that dropping dead clean lines in the L1 relieves.
//
// Interfaces: up_req_* / up_resp_* is the valid/ready channel from the L1s
// (one request at a time; a READ gets one up_resp_valid pulse, a COPYBACK
// none). mem_rd_* and mem_wr_* are valid/ready channels to DRAM, whole lines.
//
// Follows the paper: size, associativity, LRU, exclusivity, the two
// latencies. This design's choices: the tags live in flip-flops next to the
// array, one request at a time, copy-back of a line already present simply
// overwrites it, and a dirty line handed up stays dirty in the L1.
module l2_cache
  import cbp_pkg::*;
#(
  parameter int unsigned SIZE_BYTES = 1048576,
  parameter int unsigned WAYS       = 16,
  parameter int unsigned READ_LAT   = 10,
  parameter int unsigned WRITE_LAT  = 40
) (
  input  logic     clk,
  input  logic     rst_n,
  // from the L1s
  input  logic     up_req_valid,
  output logic     up_req_ready,
  input  l2_req_t  up_req,
  output logic     up_resp_valid,
  output l2_resp_t up_resp,
  // to DRAM
  output logic     mem_rd_valid,
  input  logic     mem_rd_ready,
  output laddr_t   mem_rd_addr,
  input  logic     mem_rd_resp_valid,
  input  line_t    mem_rd_resp_data,
  output logic     mem_wr_valid,
  input  logic     mem_wr_ready,
  output laddr_t   mem_wr_addr,
  output line_t    mem_wr_data,
  // statistics
  output logic [31:0] cnt_hits,
  output logic [31:0] cnt_misses,
  output logic [31:0] cnt_copyins,
  output logic [31:0] cnt_mem_writebacks
);

  localparam int unsigned SETS  = SIZE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned IDX_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned TAG_W = LADDR_W - IDX_W;
  localparam int unsigned AW    = IDX_W + WAY_W;

  typedef enum logic [3:0] {
    S_IDLE, S_LOOKUP, S_RD_ARR, S_RD_WAIT, S_MEM_RD, S_MEM_WAIT,
    S_EV_ARR, S_EV_WAIT, S_EV_MEMWR, S_WR_ARR
  } state_e;

  state_e state;

  logic [TAG_W-1:0] tags  [SETS][WAYS];
  logic [WAY_W-1:0] age   [SETS][WAYS];   // 0 = most recently used
  logic [WAYS-1:0]  valid [SETS];
  logic [WAYS-1:0]  dirty [SETS];

  l2_req_t          r_req;
  logic [WAY_W-1:0] r_way;
  logic             r_hit;
  line_t            ev_data;

  logic [IDX_W-1:0] r_idx;
  logic [TAG_W-1:0] r_tag;
  assign r_idx = r_req.addr[IDX_W-1:0];
  assign r_tag = r_req.addr[LADDR_W-1:IDX_W];

  // lookup, free way and LRU way of the addressed set
  logic             hit, has_free;
  logic [WAY_W-1:0] hit_way, free_way, lru_way;
  always_comb begin
    hit = 1'b0; hit_way = '0;
    has_free = 1'b0; free_way = '0;
    lru_way = '0;
    for (int w = 0; w < WAYS; w++)
      if (valid[r_idx][w] && tags[r_idx][w] == r_tag) begin
        hit = 1'b1; hit_way = WAY_W'(w);
      end
    for (int w = WAYS-1; w >= 0; w--)
      if (!valid[r_idx][w]) begin
        has_free = 1'b1; free_way = WAY_W'(w);
      end
    for (int w = 0; w < WAYS; w++)
      if (age[r_idx][w] == WAY_W'(WAYS-1)) lru_way = WAY_W'(w);
  end

  // data array
  logic          arr_req_valid, arr_req_ready, arr_we, arr_rsp_valid;
  logic [AW-1:0] arr_addr;
  line_t         arr_wdata, arr_rdata;

  sttmram_array #(
    .DEPTH(SETS*WAYS), .WIDTH(LINE_W), .READ_LAT(READ_LAT), .WRITE_LAT(WRITE_LAT)
  ) u_array (
    .clk, .rst_n,
    .req_valid (arr_req_valid),
    .req_ready (arr_req_ready),
    .req_we    (arr_we),
    .req_addr  (arr_addr),
    .req_wdata (arr_wdata),
    .rsp_valid (arr_rsp_valid),
    .rsp_rdata (arr_rdata)
  );

  always_comb begin
    arr_req_valid = (state == S_RD_ARR) || (state == S_EV_ARR) || (state == S_WR_ARR);
    arr_we        = (state == S_WR_ARR);
    arr_addr      = {r_idx, r_way};
    arr_wdata     = r_req.data;
  end

  assign up_req_ready  = (state == S_IDLE);
  assign mem_rd_valid  = (state == S_MEM_RD);
  assign mem_rd_addr   = r_req.addr;
  assign mem_wr_valid  = (state == S_EV_MEMWR);
  assign mem_wr_addr   = {tags[r_idx][r_way], r_idx};
  assign mem_wr_data   = ev_data;

  always_comb begin
    up_resp_valid = 1'b0;
    up_resp       = '0;
    if (state == S_RD_WAIT && arr_rsp_valid) begin
      up_resp_valid = 1'b1;
      up_resp.data  = arr_rdata;
      up_resp.dirty = dirty[r_idx][r_way];
    end else if (state == S_MEM_WAIT && mem_rd_resp_valid) begin
      up_resp_valid = 1'b1;
      up_resp.data  = mem_rd_resp_data;
      up_resp.dirty = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= S_IDLE;
      r_req   <= '0;
      r_way   <= '0;
      r_hit   <= 1'b0;
      ev_data <= '0;
      cnt_hits <= '0;
      cnt_misses <= '0;
      cnt_copyins <= '0;
      cnt_mem_writebacks <= '0;
      for (int s = 0; s < SETS; s++) begin
        valid[s] <= '0;
        dirty[s] <= '0;
        for (int w = 0; w < WAYS; w++) age[s][w] <= WAY_W'(w);
      end
    end else begin
      unique case (state)
        S_IDLE: if (up_req_valid) begin
          r_req <= up_req;
          state <= S_LOOKUP;
        end
        S_LOOKUP: begin
          r_hit <= hit;
          if (r_req.op == L2_READ) begin
            if (hit) begin
              cnt_hits <= cnt_hits + 1;
              r_way <= hit_way;
              state <= S_RD_ARR;
            end else begin
              cnt_misses <= cnt_misses + 1;
              state <= S_MEM_RD;
            end
          end else begin
            cnt_copyins <= cnt_copyins + 1;
            if (hit) begin
              r_way <= hit_way;
              state <= S_WR_ARR;
            end else if (has_free) begin
              r_way <= free_way;
              state <= S_WR_ARR;
            end else begin
              r_way <= lru_way;
              state <= dirty[r_idx][lru_way] ? S_EV_ARR : S_WR_ARR;
            end
          end
        end
        S_RD_ARR:   if (arr_req_ready) state <= S_RD_WAIT;
        S_RD_WAIT:  if (arr_rsp_valid) begin
          valid[r_idx][r_way] <= 1'b0;   // exclusive: the line moves up
          dirty[r_idx][r_way] <= 1'b0;
          state <= S_IDLE;
        end
        S_MEM_RD:   if (mem_rd_ready) state <= S_MEM_WAIT;
        S_MEM_WAIT: if (mem_rd_resp_valid) state <= S_IDLE;
        S_EV_ARR:   if (arr_req_ready) state <= S_EV_WAIT;
        S_EV_WAIT:  if (arr_rsp_valid) begin
          ev_data <= arr_rdata;
          state   <= S_EV_MEMWR;
        end
        S_EV_MEMWR: if (mem_wr_ready) begin
          cnt_mem_writebacks <= cnt_mem_writebacks + 1;
          state <= S_WR_ARR;
        end
        S_WR_ARR:   if (arr_req_ready) begin
          tags[r_idx][r_way]  <= r_tag;
          valid[r_idx][r_way] <= 1'b1;
          dirty[r_idx][r_way] <= r_req.dirty || (r_hit && dirty[r_idx][r_way]);
          for (int w = 0; w < WAYS; w++)
            if (w == int'(r_way))                   age[r_idx][w] <= '0;
            else if (age[r_idx][w] < age[r_idx][r_way]) age[r_idx][w] <= age[r_idx][w] + 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_up_resp_only_for_reads: assert property (@(posedge clk) disable iff (!rst_n)
    up_resp_valid |-> r_req.op == L2_READ);
  a_mem_rd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rd_valid && !mem_rd_ready |=> mem_rd_valid && $stable(mem_rd_addr));
  a_mem_wr_hold: assert property (@(posedge clk) disable iff (!rst_n)
    mem_wr_valid && !mem_wr_ready |=> mem_wr_valid && $stable(mem_wr_addr) && $stable(mem_wr_data));

endmodule
