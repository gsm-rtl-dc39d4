// gsm_act_buffer: on-chip activation buffer of the compute engine.
//
// Holds the output of one FC layer as the input of the next (layer fusion),
// so no intermediate result leaves the chip. Four banks (A, B, C, D) of DEPTH
// words; a word is one feature of all M graph nodes (M bytes), which is what
// the systolic array consumes per cycle (one byte per row) and what its drain
// produces per cycle (one output neuron for all nodes). Successive layers
// alternate banks in ping-pong fashion; the graph-convolution input and the
// aggregation result are kept in banks of their own because the combination
// step reads both. A fifth, register-based bank (BANK_IN) holds the channel
// input: it is written one node row (2N bytes of a 64-bit word) at a time and
// read transposed, one feature of all nodes per address.
// Read data is registered (one cycle latency). Writes take effect at the
// clock edge. The double-buffering idea is the paper's; the bank count and
// word layout are this design's choice.
module gsm_act_buffer
  import gsm_pkg::*;
#(
  parameter int M      = 4,
  parameter int N2     = 8,
  parameter int DEPTH  = 1024,
  parameter int ADDR_W = $clog2(DEPTH)
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // channel input rows (node m, features 0..N2-1 in bytes 0..N2-1)
  input  logic                  in_we,
  input  logic [$clog2(M+1)-1:0] in_row,
  input  logic [BUS_W-1:0]      in_data,
  // read port
  input  logic                  rd_en,
  input  bank_e                 rd_bank,
  input  logic [ADDR_W-1:0]     rd_addr,
  output logic [M*DATA_W-1:0]   rd_data,
  // write port
  input  logic                  we,
  input  bank_e                 wr_bank,
  input  logic [ADDR_W-1:0]     wr_addr,
  input  logic [M*DATA_W-1:0]   wr_data
);
  logic [M*DATA_W-1:0] mem [4][DEPTH];
  logic [DATA_W-1:0]   h   [M][N2];
  logic [M*DATA_W-1:0] h_word;

  always_comb begin
    h_word = '0;
    for (int m = 0; m < M; m++)
      if (int'(rd_addr) < N2)
        h_word[m*DATA_W +: DATA_W] = h[m][int'(rd_addr) % N2];
  end

  always_ff @(posedge clk) begin
    if (we && wr_bank != BANK_IN) mem[wr_bank[1:0]][wr_addr] <= wr_data;
    if (rd_en) rd_data <= (rd_bank == BANK_IN) ? h_word : mem[rd_bank[1:0]][rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < M; m++)
        for (int f = 0; f < N2; f++) h[m][f] <= '0;
    end else if (in_we) begin
      for (int f = 0; f < N2; f++) h[int'(in_row) % M][f] <= in_data[f*DATA_W +: DATA_W];
    end
  end

  a_in_fits: assert property (@(posedge clk) disable iff (!rst_n) in_we |-> int'(in_row) < M);
  a_no_wr_in: assert property (@(posedge clk) disable iff (!rst_n) we |-> wr_bank != BANK_IN);
endmodule
