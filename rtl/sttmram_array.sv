// sttmram_array: data array of the STT-MRAM L2 with its asymmetric access
// times (10-cycle read, 40-cycle write by default, as in the evaluated
// system). The storage is an ordinary memory array; only the timing of
// the STT-MRAM cells is modelled, not their analog behaviour.
//
// One access at a time. A request is taken when req_valid and req_ready are
// both high. A read taken at clock edge t returns rsp_valid/rsp_rdata
// sampled at edge t + READ_LAT; a write is stored at once but keeps the
// array busy, and the next request can be taken at edge t + WRITE_LAT.
// req_ready is high when no access is in flight or the one in flight ends
// at the coming edge. Single port and no banking are this design's choices.
module sttmram_array #(
  parameter int unsigned DEPTH     = 16384,   // 1 MB of 64-byte lines
  parameter int unsigned WIDTH     = 512,
  parameter int unsigned READ_LAT  = 10,
  parameter int unsigned WRITE_LAT = 40
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     req_valid,
  output logic                     req_ready,
  input  logic                     req_we,
  input  logic [$clog2(DEPTH)-1:0] req_addr,
  input  logic [WIDTH-1:0]         req_wdata,
  output logic                     rsp_valid,
  output logic [WIDTH-1:0]         rsp_rdata
);

  localparam int unsigned CNT_W = $clog2((READ_LAT > WRITE_LAT ? READ_LAT : WRITE_LAT) + 1);

  logic [WIDTH-1:0] mem [DEPTH];
  logic [CNT_W-1:0] cnt;        // cycles left of the access in flight
  logic             pend_rd;

  assign req_ready = (cnt <= CNT_W'(1));
  assign rsp_valid = pend_rd && (cnt == CNT_W'(1));

  always_ff @(posedge clk) begin
    if (req_valid && req_ready) begin
      if (req_we) mem[req_addr] <= req_wdata;
      else        rsp_rdata     <= mem[req_addr];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt     <= '0;
      pend_rd <= 1'b0;
    end else if (req_valid && req_ready) begin
      cnt     <= req_we ? CNT_W'(WRITE_LAT) : CNT_W'(READ_LAT);
      pend_rd <= !req_we;
    end else if (cnt != '0) begin
      cnt     <= cnt - 1'b1;
      if (cnt == CNT_W'(1)) pend_rd <= 1'b0;
    end
  end

endmodule
