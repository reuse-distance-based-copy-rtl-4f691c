// tb_cbp_hierarchy: end-to-end test of the whole hierarchy at its default
// size (32 KB 8-way L1 data cache with the copy-back predictor, 1 MB 16-way
// exclusive STT-MRAM L2), with a behavioural DRAM and an instruction-side
// requester that shares the L2.
//
// The data side runs loads and stores from three phases: a small hot set of
// lines that is reused, a streaming sweep that is touched once (dead lines),
// and conflict traffic on one L2 set that overflows it with dirty lines.
// Every load is checked against a shadow memory; instruction-side reads are
// checked against DRAM contents. The test counts how often each mechanism
// of the design happened and fails if one never did: L1 hit, L1 miss, clean
// line dropped as dead, clean line copied back, dirty line written back,
// prefetch fill, L2 hit on a copied-back line, L2 miss to DRAM, dirty L2
// victim written to DRAM, the two L1s competing for the L2, and an L2 access
// waiting for a 40-cycle STT-MRAM write. The 10-cycle read and 40-cycle
// write of the L2 array are timed on every access.
module tb_cbp_hierarchy;
  import cbp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic cpu_req_valid, cpu_req_ready, cpu_req_we, cpu_resp_valid;
  paddr_t cpu_req_addr;
  word_t cpu_req_wdata, cpu_resp_rdata;
  logic [7:0] cpu_req_wstrb;
  logic pf_valid, pf_ready;
  paddr_t pf_addr;
  logic ic_req_valid, ic_req_ready, ic_resp_valid;
  l2_req_t ic_req;
  l2_resp_t ic_resp;
  logic mem_rd_valid, mem_rd_ready, mem_rd_resp_valid, mem_wr_valid, mem_wr_ready;
  laddr_t mem_rd_addr, mem_wr_addr;
  line_t mem_rd_resp_data, mem_wr_data;
  logic [31:0] l1_hits, l1_misses, l1_copybacks, l1_drops;
  logic [31:0] l2_hits, l2_misses, l2_copyins, l2_mem_writebacks;

  int checks = 0, failures = 0;

  cbp_hierarchy dut (.*);

  dram_model #(.LAT(30)) mem (
    .clk, .rst_n,
    .rd_valid(mem_rd_valid), .rd_ready(mem_rd_ready), .rd_addr(mem_rd_addr),
    .rd_resp_valid(mem_rd_resp_valid), .rd_resp_data(mem_rd_resp_data),
    .wr_valid(mem_wr_valid), .wr_ready(mem_wr_ready), .wr_addr(mem_wr_addr), .wr_data(mem_wr_data)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // ---------------- mechanism counters ----------------
  int n_contend = 0, n_congest = 0, n_pf = 0, n_ic = 0, n_lat = 0;
  longint edge_no = 0, t_acc = 0;
  bit acc_we = 0;
  always @(posedge clk) if (rst_n) begin
    edge_no++;
    // STT-MRAM timing: read data 10 edges after the read is taken, and
    // nothing taken sooner than 40 edges after a write
    if (dut.u_l2.arr_rsp_valid) begin
      check(edge_no - t_acc == 10, $sformatf("L2 array read took %0d cycles", edge_no - t_acc));
      n_lat++;
    end
    if (dut.u_l2.arr_req_valid && dut.u_l2.arr_req_ready) begin
      if (acc_we) check(edge_no - t_acc >= 40, $sformatf("L2 array write took %0d cycles", edge_no - t_acc));
      t_acc = edge_no;
      acc_we = dut.u_l2.arr_we;
    end
    if (dut.d_req_valid && ic_req_valid) n_contend++;
    // an array access is wanted while a write still occupies the array
    if (dut.u_l2.arr_req_valid && !dut.u_l2.arr_req_ready) n_congest++;
  end

  // ---------------- data side ----------------
  word_t shadow [paddr_t];

  function automatic word_t exp_word(input paddr_t a);
    line_t l;
    l = mem.pattern(a[PADDR_W-1:OFFS_W]);
    return shadow.exists(a) ? shadow[a] : l[a[5:3]*64 +: 64];
  endfunction

  task automatic access(input bit we, input paddr_t a, input word_t wd);
    word_t e;
    e = exp_word(a);
    @(negedge clk); #1;
    cpu_req_valid = 1; cpu_req_we = we; cpu_req_addr = a; cpu_req_wdata = wd; cpu_req_wstrb = '1;
    while (!cpu_req_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 cpu_req_valid = 0;
    @(negedge clk); #1;
    while (!cpu_resp_valid) begin @(negedge clk); #1; end
    if (we) shadow[a] = wd;
    else check(cpu_resp_rdata == e, $sformatf("load %0h got %0h exp %0h", a, cpu_resp_rdata, e));
  endtask

  task automatic prefetch(input paddr_t a);
    @(negedge clk); #1;
    pf_valid = 1; pf_addr = a;
    while (!pf_ready) begin @(negedge clk); #1; end
    @(posedge clk); #1 pf_valid = 0;
    n_pf++;
  endtask

  // line address helper: L2 set, tag (L1 set is the low 6 bits of the L2 set)
  function automatic paddr_t A(input int tag, input int l2set, input int word);
    return paddr_t'(((longint'(tag) * 1024 + longint'(l2set)) * 64) + word * 8);
  endfunction

  // ---------------- instruction side ----------------
  bit ic_done = 0;
  task automatic ic_traffic(input int n);
    for (int k = 0; k < n; k++) begin
      laddr_t a;
      a = laddr_t'(A(4000 + $urandom_range(0, 63), $urandom_range(0, 1023), 0) >> 6);
      @(negedge clk); #1;
      ic_req_valid = 1; ic_req.op = L2_READ; ic_req.addr = a; ic_req.data = '0; ic_req.dirty = 0;
      while (!ic_req_ready) begin @(negedge clk); #1; end
      @(posedge clk); #1 ic_req_valid = 0;
      @(negedge clk); #1;
      while (!ic_resp_valid) begin @(negedge clk); #1; end
      check(ic_resp.data == mem.pattern(a) && !ic_resp.dirty, "instruction line");
      n_ic++;
      if ($urandom_range(0, 1) == 0) begin   // clean instruction line copied back
        @(negedge clk); #1;
        ic_req_valid = 1; ic_req.op = L2_COPYBACK; ic_req.data = mem.pattern(a);
        while (!ic_req_ready) begin @(negedge clk); #1; end
        @(posedge clk); #1 ic_req_valid = 0;
      end
      repeat ($urandom_range(5, 40)) @(posedge clk);
    end
    ic_done = 1;
  endtask

  initial begin
    #200000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hits_before;
    cpu_req_valid = 0; cpu_req_we = 0; cpu_req_addr = '0; cpu_req_wdata = '0; cpu_req_wstrb = '0;
    pf_valid = 0; pf_addr = '0;
    ic_req_valid = 0; ic_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      ic_traffic(300);
      begin
        // phase 1: hot lines reused across a streaming sweep of dead lines
        for (int round = 0; round < 6; round++) begin
          for (int h = 0; h < 64; h++) access($urandom_range(0, 3) == 0, A(h % 12, h * 16 + 3, h % 8), {$urandom, $urandom});
          for (int s = 0; s < 600; s++) access(0, A(100 + round * 600 + s, (s * 7) % 1024, 0), '0);
          if (round % 2 == 0) for (int p = 0; p < 16; p++) prefetch(A(9000 + round * 16 + p, p * 64, 0));
        end
        // phase 2: overflow one L2 set with dirty lines
        for (int k = 0; k < 48; k++) access(1, A(20000 + k, 77, 1), 64'(k));
        for (int k = 0; k < 48; k++) access(0, A(20000 + k, 77, 1), '0);
        // phase 3: random mix
        for (int i = 0; i < 4000; i++)
          access($urandom_range(0, 2) == 0, A($urandom_range(0, 200), $urandom_range(0, 1023) & 32'h3c7,
                 $urandom_range(0, 7)), {$urandom, $urandom});
      end
    join
    $display("L1: hits %0d misses %0d copy-backs %0d drops %0d", l1_hits, l1_misses, l1_copybacks, l1_drops);
    $display("L2: hits %0d misses %0d copy-ins %0d DRAM writebacks %0d", l2_hits, l2_misses, l2_copyins, l2_mem_writebacks);
    $display("prefetches %0d, I-side reads %0d, contended cycles %0d, write-congested cycles %0d",
             n_pf, n_ic, n_contend, n_congest);
    check(l1_hits > 0, "mechanism: L1 hit");
    check(l1_misses > 0, "mechanism: L1 miss");
    check(l1_drops > 0, "mechanism: clean line dropped as dead");
    check(l1_copybacks > 0, "mechanism: copy-back to L2");
    check(l2_copyins > 0, "mechanism: L2 takes copy-backs");
    check(l2_hits > 0, "mechanism: L2 hit on a copied-back line");
    check(l2_misses > 0, "mechanism: L2 miss to DRAM");
    check(l2_mem_writebacks > 0, "mechanism: dirty L2 victim to DRAM");
    check(n_pf > 0, "mechanism: prefetch fill");
    check(n_contend > 0, "mechanism: both L1s compete for the L2");
    check(n_lat > 0, "L2 array read latency was measured");
    check(n_congest > 0, "mechanism: access waits for an STT-MRAM write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
