// dram_model: behavioural stand-in for the main memory behind the L2, for
// simulation only. Whole-line reads answer LAT cycles after they are taken;
// writes are taken at once. A line never written reads as a pattern made
// from its address (pattern()), so a testbench can predict any line.
module dram_model
  import cbp_pkg::*;
#(
  parameter int unsigned LAT = 20
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   rd_valid,
  output logic   rd_ready,
  input  laddr_t rd_addr,
  output logic   rd_resp_valid,
  output line_t  rd_resp_data,
  input  logic   wr_valid,
  output logic   wr_ready,
  input  laddr_t wr_addr,
  input  line_t  wr_data
);
  line_t  mem [laddr_t];
  int     cnt;
  laddr_t pend;
  int     n_reads = 0, n_writes = 0;

  function automatic line_t pattern(input laddr_t a);
    line_t l;
    for (int i = 0; i < LINE_W / 32; i++) l[i*32 +: 32] = {a[26:0], 5'(i)} ^ 32'h5a5a_0000;
    return l;
  endfunction

  function automatic line_t peek(input laddr_t a);
    return mem.exists(a) ? mem[a] : pattern(a);
  endfunction

  assign rd_ready = (cnt == 0);
  assign wr_ready = 1'b1;
  assign rd_resp_valid = (cnt == 1);
  assign rd_resp_data  = peek(pend);

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt <= 0;
      pend <= '0;
    end else begin
      if (rd_valid && rd_ready) begin
        cnt <= LAT;
        pend <= rd_addr;
        n_reads++;
      end else if (cnt != 0) cnt <= cnt - 1;
      if (wr_valid) begin
        mem[wr_addr] = wr_data;
        n_writes++;
      end
    end
  end
endmodule
