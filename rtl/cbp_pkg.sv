// cbp_pkg: types and constants shared by the reuse-distance copy-back
// predictor (CBP), the L1 data cache that uses it and the exclusive L2.
//
// Widths that follow the published design: 4-bit saturating private (rd) and
// shared (RD) reuse distances, a 2-bit saturating hit counter, one
// prefetched bit per line, an RD update every 8 hits, priority weights
// 1 / 1 / 4 / 8 and a copy-back threshold of 9. Line size is 64 bytes and
// the physical address is 33 bits wide (enough for 8 GB of DRAM); the
// address width and the 64-bit CPU word are this design's choices.
package cbp_pkg;

  localparam int unsigned RD_W      = 4;   // private rd and shared RD width
  localparam int unsigned HC_W      = 2;   // hit-frequency counter width
  localparam int unsigned RDSUM_W   = 7;   // holds 8 x 15 = 120
  localparam int unsigned RDCNT_W   = 3;   // counts 8 hits (0..7, wraps)
  localparam int unsigned PRIO_W    = 4;   // priority 0..10
  localparam int unsigned HITS_PER_RD_UPDATE = 8;

  localparam int unsigned W_PREFETCH = 1;  // Algorithm 2, line 5
  localparam int unsigned W_LOWFREQ  = 1;  // Algorithm 2, line 8
  localparam int unsigned W_RD_MID   = 4;  // Algorithm 2, line 11
  localparam int unsigned W_RD_FAR   = 8;  // Algorithm 2, line 13
  localparam int unsigned LOWFREQ_MAX_HITS = 1; // HitCounter <= 1
  localparam int unsigned CB_THRESHOLD = 9;     // clean victims below copy back

  localparam int unsigned PADDR_W   = 33;  // 8 GB physical space
  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_W    = LINE_BYTES * 8;
  localparam int unsigned OFFS_W    = $clog2(LINE_BYTES);
  localparam int unsigned LADDR_W   = PADDR_W - OFFS_W;  // line address
  localparam int unsigned WORD_W    = 64;  // in-order 64-bit core

  typedef logic [RD_W-1:0]    rd_t;
  typedef logic [HC_W-1:0]    hc_t;
  typedef logic [PRIO_W-1:0]  prio_t;
  typedef logic [LINE_W-1:0]  line_t;
  typedef logic [LADDR_W-1:0] laddr_t;
  typedef logic [PADDR_W-1:0] paddr_t;
  typedef logic [WORD_W-1:0]  word_t;

  // CBP state of one cache line (the 7 bits added per line)
  typedef struct packed {
    rd_t  rd;          // private reuse distance
    hc_t  hits;        // hit frequency since the set's last replacement
    logic prefetched;  // line was brought in by the prefetcher
  } line_meta_t;

  // CBP state of one set
  typedef struct packed {
    rd_t                RD;      // shared (average) reuse distance
    logic [RDSUM_W-1:0] rdsum;
    logic [RDCNT_W-1:0] rdcnt;
  } set_meta_t;

  // Event applied to one set by Algorithm 1
  typedef enum logic [1:0] {
    EV_NONE = 2'd0,
    EV_MISS = 2'd1,
    EV_HIT  = 2'd2
  } rd_event_e;

  // Requests from an L1 to the L2
  typedef enum logic [0:0] {
    L2_READ     = 1'b0,   // fetch a line (exclusive: L2 gives it up)
    L2_COPYBACK = 1'b1    // victim line copied or written back from L1
  } l2_op_e;

  typedef struct packed {
    l2_op_e op;
    laddr_t addr;
    line_t  data;    // COPYBACK only
    logic   dirty;   // COPYBACK only: line holds modified data
  } l2_req_t;

  typedef struct packed {
    line_t data;
    logic  dirty;    // the line was dirty in L2 and stays dirty in L1
  } l2_resp_t;

  // Saturating increment of an N-bit value
  function automatic logic [7:0] sat_inc(input logic [7:0] v, input logic [7:0] maxv);
    return (v >= maxv) ? maxv : v + 8'd1;
  endfunction

endpackage
