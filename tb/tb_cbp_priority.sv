// tb_cbp_priority: checks the per-line replacement priority against a
// reference that follows the algorithm step by step: random metadata and RD,
// plus directed cases at the 2*RD and 3*RD boundaries and the maximum of 10.
module tb_cbp_priority;
  import cbp_pkg::*;
  localparam int WAYS = 8;

  logic [WAYS-1:0] valid;
  line_meta_t meta [WAYS];
  rd_t RD;
  prio_t prio [WAYS];

  int checks = 0, failures = 0;

  cbp_priority dut (.*);

  function automatic int ref_prio(input bit v, input line_meta_t m, input int R);
    int p = 0;
    if (!v) return 0;
    if (m.prefetched) p += 1;
    if (m.hits <= 1) p += 1;
    if (2 * R <= int'(m.rd) && int'(m.rd) <= 3 * R) p += 4;
    else if (3 * R < m.rd) p += 8;
    return p;
  endfunction

  task automatic check_all(input string tag);
    for (int w = 0; w < WAYS; w++) begin
      int e = ref_prio(valid[w], meta[w], int'(RD));
      checks++;
      if (int'(prio[w]) != e) begin
        failures++;
        $display("FAIL %s way %0d: rd=%0d RD=%0d hits=%0d pf=%0d got %0d exp %0d",
                 tag, w, meta[w].rd, RD, meta[w].hits, meta[w].prefetched, prio[w], e);
      end
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      valid = 8'($urandom);
      RD = rd_t'($urandom_range(0, 7));
      for (int w = 0; w < WAYS; w++) meta[w] = line_meta_t'($urandom);
      #1 check_all("random");
    end
    // boundaries with RD = 3: 6 and 9 get +4, 5 nothing, 10 gets +8
    valid = '1; RD = 4'd3;
    for (int w = 0; w < WAYS; w++) meta[w] = '{rd: 4'(w + 4), hits: 2'd2, prefetched: 1'b0};
    #1 check_all("boundary");
    checks++;
    if (prio[1] != 4'd0 || prio[2] != 4'd4 || prio[5] != 4'd4 || prio[6] != 4'd8) begin
      failures++; $display("FAIL boundary values");
    end
    // maximum: prefetched, cold and far
    meta[0] = '{rd: 4'd15, hits: 2'd0, prefetched: 1'b1};
    #1 checks++;
    if (prio[0] != 4'd10) begin failures++; $display("FAIL max priority %0d", prio[0]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
