// tb_cbp_policy: drives the copy-back predictor with a random stream of
// misses, hits, replacements and fills on random sets, keeps its own model of
// every line's rd, hit counter and prefetched bit and of every set's RD
// bookkeeping, and compares the victim, its priority and the copy-back
// decision with the model before every clock edge.
module tb_cbp_policy;
  import cbp_pkg::*;
  localparam int SETS = 64, WAYS = 8;

  logic clk = 0, rst_n = 0;
  logic [5:0] idx;
  logic [WAYS-1:0] valid, dirty;
  rd_event_e ev;
  logic [2:0] hit_way, fill_way;
  logic replace, fill, fill_prefetched;
  logic found, copyback;
  logic [2:0] victim;
  prio_t victim_prio;
  rd_t set_RD;

  int checks = 0, failures = 0;
  int n_cb = 0, n_drop = 0, n_rdupd = 0;

  cbp_policy dut (.*);

  always #5 clk = ~clk;

  // model
  int m_rd [SETS][WAYS], m_hc [SETS][WAYS], m_pf [SETS][WAYS];
  int m_RD [SETS], m_sum [SETS], m_cnt [SETS];

  function automatic int prio_of(int s, int w);
    int p = 0;
    if (!valid[w]) return -1;
    if (m_pf[s][w] != 0) p += 1;
    if (m_hc[s][w] <= 1) p += 1;
    if (2 * m_RD[s] <= m_rd[s][w] && m_rd[s][w] <= 3 * m_RD[s]) p += 4;
    else if (3 * m_RD[s] < m_rd[s][w]) p += 8;
    return p;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < SETS; s++) begin
      m_RD[s] = 0; m_sum[s] = 0; m_cnt[s] = 0;
      for (int w = 0; w < WAYS; w++) begin m_rd[s][w] = 0; m_hc[s][w] = 0; m_pf[s][w] = 0; end
    end
    idx = '0; valid = '0; dirty = '0; ev = EV_NONE; hit_way = '0; fill_way = '0;
    replace = 0; fill = 0; fill_prefetched = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20000; i++) begin
      int s, best, bw, r;
      @(negedge clk);
      // few sets so that state builds up
      s = $urandom_range(0, 3) * 17;
      idx = 6'(s);
      valid = ($urandom_range(0, 3) == 0) ? 8'($urandom) : 8'hff;
      dirty = 8'($urandom) & 8'($urandom);
      r = $urandom_range(0, 9);
      ev = (r < 4) ? EV_MISS : (r < 8) ? EV_HIT : EV_NONE;
      hit_way = 3'($urandom);
      replace = ($urandom_range(0, 7) == 0);
      fill = ($urandom_range(0, 5) == 0);
      fill_way = 3'($urandom);
      fill_prefetched = 1'($urandom);
      #1;
      // expected decision
      best = -1; bw = 0;
      for (int w = 0; w < WAYS; w++)
        if (prio_of(s, w) > best) begin best = prio_of(s, w); bw = w; end
      checks++;
      if (found != (best >= 0) || (best >= 0 && (int'(victim) != bw || int'(victim_prio) != best ||
          copyback != (dirty[bw] || best < 9)))) begin
        failures++;
        if (failures < 10)
          $display("FAIL i=%0d set %0d: got way=%0d prio=%0d cb=%0d exp way=%0d prio=%0d", i, s,
                   victim, victim_prio, copyback, bw, best);
      end
      checks++;
      if (int'(set_RD) != m_RD[s]) begin failures++; $display("FAIL RD set %0d", s); end
      if (best >= 0) begin if (copyback) n_cb++; else n_drop++; end
      // update model
      if (ev == EV_MISS) begin
        for (int w = 0; w < WAYS; w++) if (valid[w] && m_rd[s][w] < 15) m_rd[s][w]++;
      end else if (ev == EV_HIT) begin
        m_sum[s] += m_rd[s][hit_way];
        m_rd[s][hit_way] = 0;
        if (m_hc[s][hit_way] < 3) m_hc[s][hit_way]++;
        m_cnt[s]++;
        if (m_cnt[s] == 8) begin m_RD[s] = m_sum[s] / 8; m_sum[s] = 0; m_cnt[s] = 0; n_rdupd++; end
      end
      if (replace) for (int w = 0; w < WAYS; w++) m_hc[s][w] = 0;
      if (fill) begin m_rd[s][fill_way] = 0; m_hc[s][fill_way] = 0; m_pf[s][fill_way] = int'(fill_prefetched); end
    end
    checks++;
    if (n_cb == 0 || n_drop == 0 || n_rdupd == 0) begin
      failures++; $display("FAIL coverage cb=%0d drop=%0d rdupd=%0d", n_cb, n_drop, n_rdupd);
    end
    $display("copy-backs %0d, drops %0d, RD updates %0d", n_cb, n_drop, n_rdupd);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
