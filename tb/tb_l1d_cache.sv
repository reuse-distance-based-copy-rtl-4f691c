// tb_l1d_cache: checks the L1 data cache with the copy-back predictor at its
// full size (32 KB, 8-way), with a behavioural lower level in the testbench
// that keeps a memory image and the dirty bit of every line.
// Directed part, on one set: eight cold misses fill the set (no victim),
// the next miss finds every line at priority 9 (cold, rd above 3*RD with
// RD = 0) and drops the clean line of way 0; after eight hits have set
// RD = 3 the next victim has priority 1 and is copied back although clean;
// a dirty victim is always written back; a prefetched line is filled with
// no response to the core. Hit latency (answer 2 cycles after the request
// is taken) is checked. Random part: loads and stores over a few sets are
// checked against a shadow memory, which catches any lost dirty data, and
// every clean copy-back must equal the lower level's copy.
module tb_l1d_cache;
  import cbp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cpu_req_valid, cpu_req_ready, cpu_req_we, cpu_resp_valid;
  paddr_t cpu_req_addr;
  word_t cpu_req_wdata, cpu_resp_rdata;
  logic [7:0] cpu_req_wstrb;
  logic pf_valid, pf_ready;
  paddr_t pf_addr;
  logic l2_req_valid, l2_req_ready, l2_resp_valid;
  l2_req_t l2_req;
  l2_resp_t l2_resp;
  logic [31:0] cnt_hits, cnt_misses, cnt_copybacks, cnt_drops;

  int checks = 0, failures = 0;
  longint cyc = 0;

  l1d_cache dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- lower level model ----------------
  line_t  img   [laddr_t];
  bit     ldirty[laddr_t];
  laddr_t cb_log [$];
  int     lat_cnt = 0;
  laddr_t pend;

  function automatic line_t init_line(input laddr_t a);
    line_t l;
    for (int i = 0; i < 16; i++) l[i*32 +: 32] = {a[26:0], 5'(i)};
    return l;
  endfunction
  function automatic line_t img_of(input laddr_t a);
    return img.exists(a) ? img[a] : init_line(a);
  endfunction

  assign l2_req_ready = (lat_cnt == 0) && ($urandom_range(0, 3) != 0);
  always @(posedge clk) begin
    l2_resp_valid <= 1'b0;
    if (lat_cnt > 1) lat_cnt <= lat_cnt - 1;
    else if (lat_cnt == 1) begin
      lat_cnt <= 0;
      l2_resp_valid <= 1'b1;
      l2_resp.data  <= img_of(pend);
      l2_resp.dirty <= ldirty.exists(pend) ? ldirty[pend] : 1'b0;
      ldirty[pend] = 1'b0;                       // the line moved up
    end
    if (rst_n && l2_req_valid && l2_req_ready) begin
      if (l2_req.op == L2_READ) begin
        pend <= l2_req.addr;
        lat_cnt <= 6;
      end else begin
        if (!l2_req.dirty)
          check(l2_req.data == img_of(l2_req.addr), "clean copy-back equals lower copy");
        img[l2_req.addr] = l2_req.data;
        ldirty[l2_req.addr] = l2_req.dirty;
        cb_log.push_back(l2_req.addr);
      end
    end
  end

  // ---------------- core side ----------------
  word_t shadow [paddr_t];

  function automatic word_t mem_word(input paddr_t a);
    laddr_t la = a[PADDR_W-1:OFFS_W];
    line_t l = init_line(la);
    return shadow.exists(a) ? shadow[a] : l[a[5:3]*64 +: 64];
  endfunction

  task automatic access(input bit we, input paddr_t a, input word_t wd, output word_t rd, output longint lat);
    longint t;
    @(negedge clk); #1;
    cpu_req_valid = 1; cpu_req_we = we; cpu_req_addr = a; cpu_req_wdata = wd; cpu_req_wstrb = '1;
    while (!cpu_req_ready) begin @(negedge clk); #1; end
    t = cyc;
    @(posedge clk); #1 cpu_req_valid = 0;
    @(negedge clk); #1;
    while (!cpu_resp_valid) begin @(negedge clk); #1; end
    rd = cpu_resp_rdata;
    lat = cyc - t;
    if (we) shadow[a] = wd;
  endtask

  task automatic load_check(input paddr_t a, output longint lat);
    word_t rd, exp;
    exp = mem_word(a);
    access(0, a, '0, rd, lat);
    check(rd == exp, $sformatf("load %0h got %0h exp %0h", a, rd, exp));
  endtask

  function automatic paddr_t A(input int tag, input int set, input int word);
    return paddr_t'((tag * 64 + set) * 64 + word * 8);
  endfunction

  initial begin
    #20000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint lat;
    word_t rd;
    int c0, d0;
    cpu_req_valid = 0; cpu_req_we = 0; cpu_req_addr = '0; cpu_req_wdata = '0; cpu_req_wstrb = '0;
    pf_valid = 0; pf_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // eight cold misses fill set 5
    for (int k = 0; k < 8; k++) load_check(A(10 + k, 5, 0), lat);
    check(cnt_misses == 8 && cnt_copybacks == 0 && cnt_drops == 0, "cold fills need no victim");
    // ninth miss: every line has priority 9 -> clean way 0 (tag 10) dropped
    load_check(A(18, 5, 1), lat);
    check(cnt_drops == 1 && cnt_copybacks == 0, "clean line at priority 9 is dropped");
    // hit latency and RD: hit the eight resident lines of set 5 once each
    load_check(A(18, 5, 1), lat);
    check(lat == 2, $sformatf("hit latency %0d, expected 2", lat));
    for (int k = 11; k < 18; k++) load_check(A(k, 5, 2), lat);
    // next miss: all lines were just hit, rd = 1 is far below 2*RD -> priority 1 -> copy back
    c0 = cnt_copybacks; d0 = cnt_drops;
    load_check(A(19, 5, 0), lat);
    check(cnt_copybacks == c0 + 1 && cnt_drops == d0, "clean victim with low priority is copied back");
    check(cb_log.size() > 0 && cb_log[$] == laddr_t'(A(18, 5, 0) >> 6), "victim is way 0 of the set");
    // dirty victim: store to every line of set 6, then overflow the set
    for (int k = 0; k < 8; k++) access(1, A(30 + k, 6, 3), 64'(k + 1000), rd, lat);
    c0 = cnt_copybacks;
    load_check(A(40, 6, 0), lat);
    check(cnt_copybacks == c0 + 1, "dirty victim is written back");
    for (int k = 0; k < 8; k++) load_check(A(30 + k, 6, 3), lat);
    // prefetch: fills a line without a response; the later load hits
    @(negedge clk); pf_valid = 1; pf_addr = A(50, 7, 0);
    while (!pf_ready) @(negedge clk);
    @(negedge clk); pf_valid = 0;
    repeat (40) @(posedge clk);
    c0 = cnt_misses;
    load_check(A(50, 7, 4), lat);
    check(cnt_misses == c0 && lat == 2, "prefetched line hits");

    // random loads and stores over 4 sets x 24 tags
    for (int i = 0; i < 6000; i++) begin
      paddr_t a;
      a = A($urandom_range(100, 123), $urandom_range(0, 3) * 9, $urandom_range(0, 7));
      if ($urandom_range(0, 2) == 0) access(1, a, {$urandom, $urandom}, rd, lat);
      else load_check(a, lat);
    end
    check(cnt_copybacks > 0 && cnt_drops > 0, "random phase saw both copy-backs and drops");
    $display("L1 hits %0d misses %0d copy-backs %0d drops %0d",
             cnt_hits, cnt_misses, cnt_copybacks, cnt_drops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
