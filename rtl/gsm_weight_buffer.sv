// gsm_weight_buffer: ping-pong (double) buffer for weight tiles.
//
// Two banks of DEPTH words of BUS_W bits sit between the off-chip memory and
// the compute engine, so that the next tile is fetched while the current one
// is being consumed. The write side fills bank `wr_sel` word by word and
// marks it full with `wr_commit`, which also moves it to the other bank. The
// read side reads bank `rd_sel` (registered data, one cycle latency) and hands
// it back with `rd_release`, which empties it and moves to the other bank.
// `wr_free` / `rd_ready` tell each side whether its current bank may be used.
// The ping-pong technique is the paper's; the full/empty flags and the
// commit/release handshake are this design's own.
module gsm_weight_buffer #(
  parameter int DEPTH  = 1025,
  parameter int BUS_W  = 64,
  parameter int ADDR_W = $clog2(DEPTH)
) (
  input  logic              clk,
  input  logic              rst_n,
  // fill side (from off-chip memory)
  input  logic              wr_en,
  input  logic [ADDR_W-1:0] wr_addr,
  input  logic [BUS_W-1:0]  wr_data,
  input  logic              wr_commit,
  output logic              wr_free,
  // drain side (to compute engine)
  input  logic              rd_en,
  input  logic [ADDR_W-1:0] rd_addr,
  output logic [BUS_W-1:0]  rd_data,
  input  logic              rd_release,
  output logic              rd_ready
);
  logic [BUS_W-1:0] mem0 [DEPTH];
  logic [BUS_W-1:0] mem1 [DEPTH];
  logic [1:0]       full;
  logic             wr_sel, rd_sel;

  assign wr_free  = !full[wr_sel];
  assign rd_ready = full[rd_sel];

  always_ff @(posedge clk) begin
    if (wr_en && !wr_sel) mem0[wr_addr] <= wr_data;
    if (wr_en &&  wr_sel) mem1[wr_addr] <= wr_data;
    if (rd_en) rd_data <= rd_sel ? mem1[rd_addr] : mem0[rd_addr];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full   <= '0;
      wr_sel <= 1'b0;
      rd_sel <= 1'b0;
    end else begin
      if (wr_commit) begin
        full[wr_sel] <= 1'b1;
        wr_sel       <= !wr_sel;
      end
      if (rd_release) begin
        full[rd_sel] <= 1'b0;
        rd_sel       <= !rd_sel;
      end
    end
  end

  // Handshake rules: never write into a full bank, never read or release an
  // empty one.
  a_no_write_full: assert property (@(posedge clk) disable iff (!rst_n)
                                    (wr_en || wr_commit) |-> wr_free);
  a_no_read_empty: assert property (@(posedge clk) disable iff (!rst_n)
                                    (rd_en || rd_release) |-> rd_ready);
endmodule
