// tb_l2_arbiter: two random requesters that keep the valid/ready rule and a
// model L2 that is randomly not ready and answers READs after a few cycles.
// Checks: every request reaches the L2 exactly once and unchanged, in order
// per port; each READ response goes back to the port that asked; when both
// ports wait, grants alternate (round robin).
module tb_l2_arbiter;
  import cbp_pkg::*;

  logic clk = 0, rst_n = 0;
  logic d_req_valid, d_req_ready, d_resp_valid;
  logic i_req_valid, i_req_ready, i_resp_valid;
  l2_req_t d_req, i_req, l2_req;
  l2_resp_t resp, l2_resp;
  logic l2_req_valid, l2_req_ready, l2_resp_valid;

  int checks = 0, failures = 0;

  l2_arbiter dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  // sent requests, tagged by port through addr[32]
  l2_req_t exp_d [$], exp_i [$];
  int n_sent_d = 0, n_sent_i = 0, n_resp_d = 0, n_resp_i = 0, n_alt = 0;
  bit waiting_resp = 0, resp_to_i;
  int resp_cnt = 0;
  bit l2_busy = 0;
  bit last_grant_i, prev_stall = 0;

  // lower model: takes a request when not busy, answers READs after 3 cycles
  assign l2_req_ready = !l2_busy && ($urandom_range(0, 2) != 0);
  always @(posedge clk) begin
    l2_resp_valid <= 0;
    if (resp_cnt > 0) begin
      resp_cnt <= resp_cnt - 1;
      if (resp_cnt == 1) begin
        l2_resp_valid <= 1;
        l2_resp.data <= {16{32'(resp_to_i)}};
        l2_busy <= 0;
      end
    end
    if (rst_n && l2_req_valid && l2_req_ready) begin
      l2_req_t e;
      bit from_i;
      from_i = l2_req.addr[LADDR_W-1];
      if (from_i) e = exp_i.pop_front(); else e = exp_d.pop_front();
      check(l2_req == e, "request arrives unchanged and in order");
      // contested: both ask and no earlier choice is being held
      if (d_req_valid && i_req_valid && !prev_stall) begin
        check(from_i != last_grant_i, "round robin when both wait");
        n_alt++;
      end
      last_grant_i = from_i;
      if (l2_req.op == L2_READ) begin
        resp_to_i = from_i; resp_cnt <= 3; l2_busy <= 1;
      end
    end
  end

  always @(posedge clk) if (rst_n) begin
    prev_stall <= l2_req_valid && !l2_req_ready;
    if (d_resp_valid) begin n_resp_d++; check(resp.data[0] == 1'b0, "D response went to D"); end
    if (i_resp_valid) begin n_resp_i++; check(resp.data[0] == 1'b1, "I response went to I"); end
    check(!(d_resp_valid && i_resp_valid), "one response at a time");
  end

  // requesters
  task automatic requester(input bit is_i, input int n);
    for (int k = 0; k < n; k++) begin
      l2_req_t r;
      r.op = l2_op_e'($urandom_range(0, 1));
      r.addr = {is_i, 26'($urandom)};
      r.data = {16{$urandom}};
      r.dirty = 1'($urandom);
      @(negedge clk);
      if (is_i) begin exp_i.push_back(r); i_req = r; i_req_valid = 1; end
      else      begin exp_d.push_back(r); d_req = r; d_req_valid = 1; end
      do @(posedge clk); while (!(is_i ? i_req_ready : d_req_ready));
      #1;
      if (is_i) i_req_valid = 0; else d_req_valid = 0;
      if (r.op == L2_READ) begin
        // wait for own response, as an L1 does
        do @(posedge clk); while (!(is_i ? i_resp_valid : d_resp_valid));
      end
      repeat ($urandom_range(0, 2)) @(posedge clk);
      if (is_i) n_sent_i++; else n_sent_d++;
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    d_req_valid = 0; i_req_valid = 0; d_req = '0; i_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      requester(0, 500);
      requester(1, 500);
    join
    repeat (10) @(posedge clk);
    check(exp_d.size() == 0 && exp_i.size() == 0, "all requests delivered");
    check(n_alt > 10, $sformatf("both ports competed (%0d times)", n_alt));
    $display("sent D %0d I %0d, responses D %0d I %0d, contested grants %0d",
             n_sent_d, n_sent_i, n_resp_d, n_resp_i, n_alt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
