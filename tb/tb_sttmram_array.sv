// tb_sttmram_array: writes and reads random lines of the STT-MRAM array
// model and checks the data against a shadow copy, that a read answers
// exactly READ_LAT cycles after it is taken and that a write keeps the
// array busy for exactly WRITE_LAT cycles.
module tb_sttmram_array;
  localparam int DEPTH = 16384, WIDTH = 512, RL = 10, WL = 40;

  logic clk = 0, rst_n = 0;
  logic req_valid, req_ready, req_we, rsp_valid;
  logic [13:0] req_addr;
  logic [WIDTH-1:0] req_wdata, rsp_rdata;

  int checks = 0, failures = 0;
  logic [WIDTH-1:0] shadow [int];
  longint cyc = 0;

  sttmram_array dut (.*);

  always #5 clk = ~clk;
  always @(negedge clk) cyc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  function automatic logic [WIDTH-1:0] rnd_line();
    logic [WIDTH-1:0] l;
    for (int i = 0; i < WIDTH / 32; i++) l[i*32 +: 32] = $urandom;
    return l;
  endfunction

  // issue one request; returns the number (cyc) of the clock edge that took it.
  // Signals are driven and sampled just after falling edges.
  task automatic issue(input bit we, input int a, input logic [WIDTH-1:0] d, output longint t);
    @(negedge clk); #1;
    req_valid = 1; req_we = we; req_addr = 14'(a); req_wdata = d;
    while (!req_ready) begin @(negedge clk); #1; end
    t = cyc;
    @(posedge clk); #1 req_valid = 0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int addrs [16];
    longint t0, t1;
    req_valid = 0; req_we = 0; req_addr = 0; req_wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 16; i++) addrs[i] = $urandom_range(0, DEPTH - 1);
    // back-to-back writes: each must be taken WL cycles after the previous
    for (int i = 0; i < 16; i++) begin
      logic [WIDTH-1:0] d;
      d = rnd_line();
      issue(1, addrs[i], d, t1);
      shadow[addrs[i]] = d;
      if (i > 0) check(t1 - t0 == longint'(WL), $sformatf("write spacing %0d, expected %0d", t1 - t0, WL));
      t0 = t1;
    end
    // reads: data and latency
    for (int i = 0; i < 16; i++) begin
      issue(0, addrs[i], '0, t0);
      @(negedge clk); #1;
      while (!rsp_valid) begin @(negedge clk); #1; end
      // rsp_valid seen before edge number cyc, READ_LAT edges after the one that took the read
      check(cyc - t0 == longint'(RL), $sformatf("read latency %0d, expected %0d", cyc - t0, RL));
      check(rsp_rdata == shadow[addrs[i]], $sformatf("read data at %0d", addrs[i]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
