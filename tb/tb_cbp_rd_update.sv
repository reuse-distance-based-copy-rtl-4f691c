// tb_cbp_rd_update: checks the reuse-distance update of one set against a
// reference written from the algorithm's text: random rd values, valid
// masks and RD bookkeeping, each of none / miss / hit, plus a directed run
// of eight hits that must produce RD = sum / 8.
module tb_cbp_rd_update;
  import cbp_pkg::*;
  localparam int WAYS = 8;

  rd_event_e ev;
  logic [2:0] hit_way;
  logic [WAYS-1:0] valid;
  rd_t rd_cur [WAYS];
  rd_t rd_nxt [WAYS];
  set_meta_t set_cur, set_nxt;

  int checks = 0, failures = 0;

  cbp_rd_update dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // reference model
  task automatic expect_next();
    int exp_rd [WAYS];
    int sum, cnt, RD;
    sum = int'(set_cur.rdsum); cnt = int'(set_cur.rdcnt); RD = int'(set_cur.RD);
    for (int w = 0; w < WAYS; w++) exp_rd[w] = int'(rd_cur[w]);
    if (ev == EV_MISS) begin
      for (int w = 0; w < WAYS; w++)
        if (valid[w]) exp_rd[w] = (rd_cur[w] == 4'd15) ? 15 : int'(rd_cur[w]) + 1;
    end else if (ev == EV_HIT) begin
      sum += int'(rd_cur[hit_way]);
      exp_rd[hit_way] = 0;
      cnt += 1;
      if (cnt == 8) begin
        RD = sum / 8; sum = 0; cnt = 0;
      end
    end
    for (int w = 0; w < WAYS; w++)
      check(int'(rd_nxt[w]) == exp_rd[w], $sformatf("rd[%0d] ev=%0d got %0d exp %0d", w, ev, rd_nxt[w], exp_rd[w]));
    check(int'(set_nxt.RD) == RD && int'(set_nxt.rdsum) == sum && int'(set_nxt.rdcnt) == cnt,
          $sformatf("set ev=%0d got RD=%0d sum=%0d cnt=%0d exp %0d %0d %0d", ev,
                    set_nxt.RD, set_nxt.rdsum, set_nxt.rdcnt, RD, sum, cnt));
  endtask

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc;
    // random single events
    for (int i = 0; i < 3000; i++) begin
      ev = rd_event_e'($urandom_range(0, 2));
      hit_way = 3'($urandom);
      valid = 8'($urandom);
      for (int w = 0; w < WAYS; w++) rd_cur[w] = rd_t'($urandom);
      set_cur.RD = rd_t'($urandom);
      set_cur.rdcnt = 3'($urandom);
      set_cur.rdsum = 7'($urandom_range(0, 15 * set_cur.rdcnt));
      #1;
      expect_next();
    end
    // eight hits in a row: RD = sum of the eight rds / 8
    set_cur = '0; valid = '1; ev = EV_HIT; acc = 0;
    for (int k = 0; k < 8; k++) begin
      hit_way = 3'(k);
      for (int w = 0; w < WAYS; w++) rd_cur[w] = rd_t'(w + 7);
      #1;
      acc += k + 7;
      if (k < 7) begin
        check(set_nxt.RD == '0 && int'(set_nxt.rdsum) == acc, "RD must wait for the eighth hit");
      end else begin
        check(int'(set_nxt.RD) == acc / 8, $sformatf("RD after 8 hits got %0d exp %0d", set_nxt.RD, acc / 8));
      end
      set_cur = set_nxt;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
