// gsm_offchip_mem: behavioural model of the external memory (testbench only).
//
// 64-bit words. Reads: request valid/ready with a word address; the word
// comes back LAT cycles after the accepted request, in order. When STALL is
// non-zero the request ready line drops at random about STALL% of the time,
// to exercise back-pressure. Words written through the write port, or placed
// in `store` by the testbench, are returned from `store`; every other address
// returns gsm_tb_pkg::wword(addr), the generated weight content. Writes are
// accepted with the same random ready.
module gsm_offchip_mem
  import gsm_tb_pkg::*;
#(
  parameter int LAT   = 3,
  parameter int STALL = 0
) (
  input  logic        clk,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_req_addr,
  output logic        rd_rsp_valid,
  output logic [63:0] rd_rsp_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [63:0] wr_data
);
  logic [63:0] store [int unsigned];
  logic        pv [LAT];
  logic [63:0] pd [LAT];
  int          stalls = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin
      pv[i] = 1'b0;
      pd[i] = '0;
    end
    rd_req_ready = 1'b1;
    wr_ready = 1'b1;
  end

  assign rd_rsp_valid = pv[LAT-1];
  assign rd_rsp_data  = pd[LAT-1];

  always @(posedge clk) begin
    for (int i = LAT - 1; i > 0; i--) begin
      pv[i] <= pv[i-1];
      pd[i] <= pd[i-1];
    end
    pv[0] <= rd_req_valid && rd_req_ready;
    if (store.exists(rd_req_addr)) pd[0] <= store[rd_req_addr];
    else pd[0] <= wword(rd_req_addr);
    if (wr_valid && wr_ready) store[wr_addr] = wr_data;
    if (rd_req_valid && !rd_req_ready) stalls++;
    rd_req_ready <= (STALL == 0) || (($urandom % 100) >= STALL);
    wr_ready     <= (STALL == 0) || (($urandom % 100) >= STALL);
  end
endmodule
