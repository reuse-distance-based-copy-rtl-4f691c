// cbp_hierarchy: two-level exclusive cache hierarchy with the reuse-distance
// copy-back predictor in the L1 data cache and a shared STT-MRAM L2.
//
// Structure: the core's load/store port and the stride prefetcher's
// requests enter l1d_cache (32 KB, 8-way, CBP replacement). Its misses and
// its copy-backs go through l2_arbiter, shared with the L1 instruction
// cache, to l2_cache (1 MB, 16-way, LRU, exclusive, 10-cycle read and
// 40-cycle write STT-MRAM array), which talks to DRAM. The core, the
// instruction cache, the prefetcher and DRAM are not part of this design:
// their connections are ports of this module.
//
// Interfaces: cpu_* is the 64-bit data port of the core; pf_* carries
// prefetch addresses; ic_* is the instruction cache's request channel to
// the L2 (same request and response format as the data cache uses); mem_*
// are whole-line DRAM read and write channels. The counters give the L1
// hits, misses, copy-backs and dropped clean lines, and the L2 hits, misses,
// lines copied in and dirty lines written to DRAM.
module cbp_hierarchy
  import cbp_pkg::*;
#(
  parameter int unsigned L1D_SIZE_BYTES = 32768,
  parameter int unsigned L1D_WAYS       = 8,
  parameter int unsigned CB_THRESH      = CB_THRESHOLD,
  parameter int unsigned L2_SIZE_BYTES  = 1048576,
  parameter int unsigned L2_WAYS        = 16,
  parameter int unsigned L2_READ_LAT    = 10,
  parameter int unsigned L2_WRITE_LAT   = 40
) (
  input  logic     clk,
  input  logic     rst_n,
  // core data port
  input  logic     cpu_req_valid,
  output logic     cpu_req_ready,
  input  logic     cpu_req_we,
  input  paddr_t   cpu_req_addr,
  input  word_t    cpu_req_wdata,
  input  logic [WORD_W/8-1:0] cpu_req_wstrb,
  output logic     cpu_resp_valid,
  output word_t    cpu_resp_rdata,
  // prefetcher
  input  logic     pf_valid,
  output logic     pf_ready,
  input  paddr_t   pf_addr,
  // instruction cache to L2
  input  logic     ic_req_valid,
  output logic     ic_req_ready,
  input  l2_req_t  ic_req,
  output logic     ic_resp_valid,
  output l2_resp_t ic_resp,
  // DRAM
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
  output logic [31:0] l1_hits,
  output logic [31:0] l1_misses,
  output logic [31:0] l1_copybacks,
  output logic [31:0] l1_drops,
  output logic [31:0] l2_hits,
  output logic [31:0] l2_misses,
  output logic [31:0] l2_copyins,
  output logic [31:0] l2_mem_writebacks
);

  logic     d_req_valid, d_req_ready, d_resp_valid;
  l2_req_t  d_req;
  l2_resp_t resp;
  logic     l2_req_valid, l2_req_ready, l2_resp_valid;
  l2_req_t  l2_req;
  l2_resp_t l2_resp;

  l1d_cache #(
    .SIZE_BYTES(L1D_SIZE_BYTES), .WAYS(L1D_WAYS), .THRESHOLD(CB_THRESH)
  ) u_l1d (
    .clk, .rst_n,
    .cpu_req_valid, .cpu_req_ready, .cpu_req_we, .cpu_req_addr,
    .cpu_req_wdata, .cpu_req_wstrb, .cpu_resp_valid, .cpu_resp_rdata,
    .pf_valid, .pf_ready, .pf_addr,
    .l2_req_valid  (d_req_valid),
    .l2_req_ready  (d_req_ready),
    .l2_req        (d_req),
    .l2_resp_valid (d_resp_valid),
    .l2_resp       (resp),
    .cnt_hits      (l1_hits),
    .cnt_misses    (l1_misses),
    .cnt_copybacks (l1_copybacks),
    .cnt_drops     (l1_drops)
  );

  l2_arbiter u_arb (
    .clk, .rst_n,
    .d_req_valid, .d_req_ready, .d_req, .d_resp_valid,
    .i_req_valid  (ic_req_valid),
    .i_req_ready  (ic_req_ready),
    .i_req        (ic_req),
    .i_resp_valid (ic_resp_valid),
    .resp,
    .l2_req_valid, .l2_req_ready, .l2_req, .l2_resp_valid, .l2_resp
  );
  assign ic_resp = resp;

  l2_cache #(
    .SIZE_BYTES(L2_SIZE_BYTES), .WAYS(L2_WAYS),
    .READ_LAT(L2_READ_LAT), .WRITE_LAT(L2_WRITE_LAT)
  ) u_l2 (
    .clk, .rst_n,
    .up_req_valid  (l2_req_valid),
    .up_req_ready  (l2_req_ready),
    .up_req        (l2_req),
    .up_resp_valid (l2_resp_valid),
    .up_resp       (l2_resp),
    .mem_rd_valid, .mem_rd_ready, .mem_rd_addr,
    .mem_rd_resp_valid, .mem_rd_resp_data,
    .mem_wr_valid, .mem_wr_ready, .mem_wr_addr, .mem_wr_data,
    .cnt_hits           (l2_hits),
    .cnt_misses         (l2_misses),
    .cnt_copyins        (l2_copyins),
    .cnt_mem_writebacks (l2_mem_writebacks)
  );

endmodule
