// tb_cbp_victim_select: checks victim choice (highest priority, lowest way
// on a tie, only valid lines) and the copy-back rule (dirty, or priority
// below 9) against a reference, on random sets and on directed cases at the
// threshold.
module tb_cbp_victim_select;
  import cbp_pkg::*;
  localparam int WAYS = 8;

  logic [WAYS-1:0] valid, dirty;
  prio_t prio [WAYS];
  logic found, copyback;
  logic [2:0] victim;
  prio_t victim_prio;

  int checks = 0, failures = 0;
  int cb_seen = 0, drop_seen = 0;

  cbp_victim_select dut (.*);

  task automatic check_ref();
    int best = -1, bw = 0;
    bit ecb;
    for (int w = 0; w < WAYS; w++)
      if (valid[w] && int'(prio[w]) > best) begin best = int'(prio[w]); bw = w; end
    ecb = (best >= 0) && (dirty[bw] || best < 9);
    checks++;
    if (found != (best >= 0) || (best >= 0 && (int'(victim) != bw || int'(victim_prio) != best))
        || copyback != ecb) begin
      failures++;
      $display("FAIL valid=%b got found=%0d way=%0d prio=%0d cb=%0d exp way=%0d prio=%0d cb=%0d",
               valid, found, victim, victim_prio, copyback, bw, best, ecb);
    end
    if (ecb) cb_seen++; else if (best >= 0) drop_seen++;
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 3000; i++) begin
      valid = 8'($urandom);
      dirty = 8'($urandom);
      for (int w = 0; w < WAYS; w++) prio[w] = prio_t'($urandom_range(0, 10));
      #1 check_ref();
    end
    // directed: clean victim at 9 is dropped, at 8 copied back, dirty at 10 copied back
    valid = '1; dirty = '0;
    for (int w = 0; w < WAYS; w++) prio[w] = 4'd1;
    prio[3] = 4'd9; prio[5] = 4'd9;
    #1 check_ref();
    checks++;
    if (victim != 3'd3 || copyback) begin failures++; $display("FAIL clean 9 must drop, way 3"); end
    prio[3] = 4'd8; prio[5] = 4'd8;
    #1 checks++;
    if (!copyback) begin failures++; $display("FAIL clean 8 must copy back"); end
    prio[6] = 4'd10; dirty[6] = 1'b1;
    #1 checks++;
    if (victim != 3'd6 || !copyback) begin failures++; $display("FAIL dirty 10 must copy back"); end
    checks++;
    if (cb_seen == 0 || drop_seen == 0) begin failures++; $display("FAIL both outcomes must occur"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
