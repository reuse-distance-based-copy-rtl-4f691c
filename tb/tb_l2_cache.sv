// tb_l2_cache: checks the exclusive STT-MRAM L2 at its full size.
// Directed part: a READ miss comes from DRAM and is not kept; a copied-back
// dirty line is returned once with its dirty bit and then gone (exclusive);
// a READ hit answers 12 cycles after it is taken (lookup, array start and
// the 10-cycle read); a READ behind a copy-back waits for the 40-cycle
// write; a 17th line copied into a full set pushes the least recently used
// dirty line out to DRAM. Random part: the testbench acts as an L1 that
// fetches, modifies, copies back or silently drops (clean only) lines of
// two sets, and checks every returned line against its own memory image.
module tb_l2_cache;
  import cbp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic up_req_valid, up_req_ready, up_resp_valid;
  l2_req_t up_req;
  l2_resp_t up_resp;
  logic mem_rd_valid, mem_rd_ready, mem_rd_resp_valid, mem_wr_valid, mem_wr_ready;
  laddr_t mem_rd_addr, mem_wr_addr;
  line_t mem_rd_resp_data, mem_wr_data;
  logic [31:0] cnt_hits, cnt_misses, cnt_copyins, cnt_mem_writebacks;

  int checks = 0, failures = 0;
  longint cyc = 0;

  l2_cache dut (.*);
  dram_model #(.LAT(20)) mem (
    .clk, .rst_n,
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rd_resp_valid(mem_rd_resp_valid), .rd_resp_data(mem_rd_resp_data),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data)
  );

  always #5 clk = ~clk;
  always @(negedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic line_t rnd_line();
    line_t l;
    for (int i = 0; i < LINE_W / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  function automatic laddr_t la(input int tag, input int set);
    return laddr_t'(tag * 1024 + set);
  endfunction

  // send a request; t = number of the edge that took it
  task automatic send(input l2_op_e op, input laddr_t a, input line_t d, input bit dirty, output longint t);
    @(negedge clk); #1;
    up_req_valid = 1; up_req.op = op; up_req.addr = a; up_req.data = d; up_req.dirty = dirty;
    while (!up_req_ready) begin @(negedge clk); #1; end
    t = cyc;
    @(posedge clk); #1 up_req_valid = 0;
  endtask

  task automatic read(input laddr_t a, output l2_resp_t r, output longint lat);
    longint t;
    send(L2_READ, a, '0, 0, t);
    @(negedge clk); #1;
    while (!up_resp_valid) begin @(negedge clk); #1; end
    r = up_resp;
    lat = cyc - t;
  endtask

  initial begin
    #50000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // memory image as seen by the "L1": held lines live in the L1
  line_t truth [laddr_t];
  bit    held  [laddr_t];
  bit    hdirty[laddr_t];

  initial begin
    l2_resp_t r;
    longint lat, t;
    line_t d;
    int wb0;
    up_req_valid = 0; up_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // READ miss
    read(la(5, 7), r, lat);
    check(r.data == mem.pattern(la(5, 7)) && !r.dirty, "miss data from DRAM");
    check(cnt_misses == 1 && cnt_hits == 0, "miss counted");
    // copy back dirty, read back, then it must be gone
    d = rnd_line();
    send(L2_COPYBACK, la(5, 7), d, 1, t);
    read(la(5, 7), r, lat);
    check(r.data == d && r.dirty, "copied-back dirty line returned with dirty bit");
    read(la(5, 7), r, lat);
    check(r.data == mem.pattern(la(5, 7)) && cnt_misses == 2, "exclusive: line left the L2");
    // hit latency with an idle array: 1 lookup + 1 array start + 10 read
    send(L2_COPYBACK, la(6, 7), d, 0, t);
    repeat (60) @(posedge clk);
    read(la(6, 7), r, lat);
    check(lat == 12, $sformatf("read hit latency %0d, expected 12", lat));
    // read right behind a copy-back must wait for the 40-cycle write
    send(L2_COPYBACK, la(7, 7), d, 0, t);
    read(la(7, 7), r, lat);
    check(lat >= 40, $sformatf("read behind a write took %0d cycles", lat));
    // fill set 9 with 16 dirty lines, then a 17th evicts the first (LRU) to DRAM
    wb0 = cnt_mem_writebacks;
    for (int k = 0; k < 16; k++) send(L2_COPYBACK, la(100 + k, 9), {16{32'(k)}}, 1, t);
    send(L2_COPYBACK, la(200, 9), d, 1, t);
    repeat (150) @(posedge clk);
    check(cnt_mem_writebacks == wb0 + 1, "one dirty victim written to DRAM");
    check(mem.peek(la(100, 9)) == {16{32'(0)}}, "LRU line (first in) is the one written back");
    read(la(101, 9), r, lat);
    check(r.data == {16{32'(1)}} && r.dirty, "second line still in L2");
    read(la(100, 9), r, lat);
    check(r.data == {16{32'(0)}} && !r.dirty, "evicted line now comes from DRAM");

    // random L1 behaviour over two sets, 80 tags each
    for (int i = 0; i < 4000; i++) begin
      laddr_t a;
      a = la($urandom_range(300, 379), ($urandom_range(0, 1) == 0) ? 3 : 500);
      if (!truth.exists(a)) truth[a] = mem.pattern(a);
      if (!held.exists(a) || !held[a]) begin
        read(a, r, lat);
        check(r.data == truth[a], $sformatf("random read of %0h", a));
        held[a] = 1; hdirty[a] = r.dirty;
      end else begin
        int c;
        c = $urandom_range(0, 2);
        if (c == 0) begin                       // modify and write back
          truth[a] = rnd_line();
          send(L2_COPYBACK, a, truth[a], 1, t);
          held[a] = 0;
        end else if (c == 1 || hdirty[a]) begin // clean copy-back (or dirty must go back)
          send(L2_COPYBACK, a, truth[a], hdirty[a], t);
          held[a] = 0;
        end else begin                          // clean and dropped
          held[a] = 0;
        end
      end
    end
    check(cnt_mem_writebacks > wb0 + 1, "random phase caused dirty evictions");
    $display("L2 hits %0d misses %0d copy-ins %0d DRAM writes %0d",
             cnt_hits, cnt_misses, cnt_copyins, cnt_mem_writebacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
