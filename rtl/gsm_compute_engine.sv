// gsm_compute_engine: systolic-array compute engine of the GNN accelerator.
//
// NUM_SA systolic arrays of M rows x SA_COLS columns work in lockstep on one
// weight tile: a tile is one bias word plus in_dim weight words of the
// off-chip bus, and each 64-bit weight word carries one 8-bit weight for each
// of the NCOL = NUM_SA*SA_COLS output neurons of the tile. Per issued word
// the engine reads one feature of all M nodes from the activation buffer
// (through the combination mapping), skews rows and columns, and feeds the
// arrays. When the arrays hold the finished dot products, a drain walks the
// NCOL output neurons, one per cycle: bias, requantisation and ReLU
// (gsm_relu), optional neighbour max aggregation (gsm_aggregation), and a
// write of one word (that neuron for all nodes) into the destination bank, or,
// for the final layer, into the post-processor.
//
// Timing: the controller presents an issue (is_*) in cycle t; weight data and
// activation data arrive in t+1. The last word of a tile reaches the
// bottom-right PE M+SA_COLS-2 cycles later; the drain then takes NCOL cycles
// and `tile_done` is high in its last cycle. The controller must not issue
// the last word of the next tile before `tile_done` (results are read straight
// from the PEs), and must not start a new layer before it.
// SAs, ReLU, aggregation, combination and the double buffer are the blocks the
// paper places in its compute engine; the word-per-tile-row mapping, the
// skewing and the drain order are this design's choice.
module gsm_compute_engine
  import gsm_pkg::*;
#(
  parameter int M       = 4,
  parameter int N2      = 8,
  parameter int DEPTH   = 1024,
  parameter int SA_COLS = 4,
  parameter int NUM_SA  = 2,
  parameter int W_FRAC  = 6,
  parameter int ADDR_W  = $clog2(DEPTH)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // channel input rows
  input  logic                     in_we,
  input  logic [$clog2(M+1)-1:0]   in_row,
  input  logic [BUS_W-1:0]         in_data,
  // issue of one tile word
  input  logic                     is_valid,
  input  logic                     is_bias,
  input  logic                     is_first,
  input  logic                     is_last,
  input  logic [DIM_W-1:0]         is_k,
  input  layer_cfg_t               is_cfg,
  input  logic [DIM_W-1:0]         is_out_base,
  // weight word, one cycle after the issue
  input  logic [BUS_W-1:0]         w_data,
  // completion and final-layer output
  output logic                     tile_done,
  output logic                     pp_we,
  output logic [DIM_W-1:0]         pp_col,
  output logic [M*DATA_W-1:0]      pp_data
);
  localparam int NCOL = NUM_SA * SA_COLS;

  // ---------------------------------------------------------------- read side
  bank_e               rd_bank;
  logic [ADDR_W-1:0]   rd_addr;
  logic [M*DATA_W-1:0] act_rd;
  logic                act_we;
  logic [ADDR_W-1:0]   act_waddr;
  logic [M*DATA_W-1:0] act_wdata;
  layer_cfg_t          drain_cfg;

  gsm_combination #(.ADDR_W(ADDR_W)) u_comb (
    .k       (is_k),
    .split   (is_cfg.split),
    .src     (is_cfg.src),
    .src2    (is_cfg.src2),
    .rd_bank (rd_bank),
    .rd_addr (rd_addr)
  );

  gsm_act_buffer #(.M(M), .N2(N2), .DEPTH(DEPTH)) u_act (
    .clk     (clk),
    .rst_n   (rst_n),
    .in_we   (in_we),
    .in_row  (in_row),
    .in_data (in_data),
    .rd_en   (is_valid && !is_bias),
    .rd_bank (rd_bank),
    .rd_addr (rd_addr),
    .rd_data (act_rd),
    .we      (act_we),
    .wr_bank (drain_cfg.dst),
    .wr_addr (act_waddr),
    .wr_data (act_wdata)
  );

  // tags aligned with the data (cycle t+1)
  logic             d_mac, d_bias, d_first, d_last;
  layer_cfg_t       d_cfg;
  logic [DIM_W-1:0] d_base;
  logic [DATA_W-1:0] bias_cur   [NCOL];
  logic [DATA_W-1:0] bias_drain [NCOL];
  logic [DIM_W-1:0]  drain_base;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      d_mac   <= 1'b0;
      d_bias  <= 1'b0;
      d_first <= 1'b0;
      d_last  <= 1'b0;
      d_cfg   <= '0;
      d_base  <= '0;
    end else begin
      d_mac   <= is_valid && !is_bias;
      d_bias  <= is_valid && is_bias;
      d_first <= is_valid && is_first;
      d_last  <= is_valid && is_last;
      d_cfg   <= is_cfg;
      d_base  <= is_out_base;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int j = 0; j < NCOL; j++) begin
        bias_cur[j]   <= '0;
        bias_drain[j] <= '0;
      end
      drain_cfg  <= '0;
      drain_base <= '0;
    end else begin
      if (d_bias)
        for (int j = 0; j < NCOL; j++) bias_cur[j] <= w_data[j*DATA_W +: DATA_W];
      if (d_last) begin
        bias_drain <= bias_cur;
        drain_cfg  <= d_cfg;
        drain_base <= d_base;
      end
    end
  end

  // ------------------------------------------------------------------- skewing
  // Row r is delayed r cycles, column c (and its tags) c cycles.
  logic signed [DATA_W-1:0] x_row [M];
  logic [DATA_W-1:0]        x_dl  [M][M];
  logic [DATA_W-1:0]        w_dl  [NCOL][SA_COLS];
  logic                     v_dl  [SA_COLS][SA_COLS];
  logic                     f_dl  [SA_COLS][SA_COLS];
  logic                     l_dl  [SA_COLS][SA_COLS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < M; r++)
        for (int i = 0; i < M; i++) x_dl[r][i] <= '0;
      for (int j = 0; j < NCOL; j++)
        for (int i = 0; i < SA_COLS; i++) w_dl[j][i] <= '0;
      for (int c = 0; c < SA_COLS; c++)
        for (int i = 0; i < SA_COLS; i++) begin
          v_dl[c][i] <= 1'b0;
          f_dl[c][i] <= 1'b0;
          l_dl[c][i] <= 1'b0;
        end
    end else begin
      for (int r = 0; r < M; r++) begin
        x_dl[r][0] <= act_rd[r*DATA_W +: DATA_W];
        for (int i = 1; i < M; i++) x_dl[r][i] <= x_dl[r][i-1];
      end
      for (int j = 0; j < NCOL; j++) begin
        w_dl[j][0] <= w_data[j*DATA_W +: DATA_W];
        for (int i = 1; i < SA_COLS; i++) w_dl[j][i] <= w_dl[j][i-1];
      end
      for (int c = 0; c < SA_COLS; c++) begin
        v_dl[c][0] <= d_mac;
        f_dl[c][0] <= d_first;
        l_dl[c][0] <= d_last;
        for (int i = 1; i < SA_COLS; i++) begin
          v_dl[c][i] <= v_dl[c][i-1];
          f_dl[c][i] <= f_dl[c][i-1];
          l_dl[c][i] <= l_dl[c][i-1];
        end
      end
    end
  end

  always_comb begin
    for (int r = 0; r < M; r++)
      x_row[r] = (r == 0) ? act_rd[DATA_W-1:0] : x_dl[r][(r == 0) ? 0 : r-1];
  end

  // ------------------------------------------------------------ systolic arrays
  logic signed [ACC_W-1:0] res  [NUM_SA][M][SA_COLS];
  logic                    done [NUM_SA];

  for (genvar s = 0; s < NUM_SA; s++) begin : g_sa
    logic signed [DATA_W-1:0] w_col [SA_COLS];
    logic                     v_col [SA_COLS];
    logic                     f_col [SA_COLS];
    logic                     l_col [SA_COLS];
    always_comb begin
      for (int c = 0; c < SA_COLS; c++) begin
        if (c == 0) begin
          w_col[c] = w_data[(s*SA_COLS)*DATA_W +: DATA_W];
          v_col[c] = d_mac;
          f_col[c] = d_first;
          l_col[c] = d_last;
        end else begin
          w_col[c] = w_dl[s*SA_COLS+c][(c == 0) ? 0 : c-1];
          v_col[c] = v_dl[c][(c == 0) ? 0 : c-1];
          f_col[c] = f_dl[c][(c == 0) ? 0 : c-1];
          l_col[c] = l_dl[c][(c == 0) ? 0 : c-1];
        end
      end
    end
    gsm_systolic_array #(.ROWS(M), .COLS(SA_COLS), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_sa (
      .clk    (clk),
      .rst_n  (rst_n),
      .x_left (x_row),
      .w_top  (w_col),
      .v_top  (v_col),
      .f_top  (f_col),
      .l_top  (l_col),
      .res    (res[s]),
      .done   (done[s])
    );
  end

  // --------------------------------------------------------------------- drain
  logic                     dr_active;
  logic [$clog2(NCOL)-1:0]  dr_cnt;
  logic signed [ACC_W-1:0]  col_acc [M];
  logic signed [DATA_W-1:0] col_bias;
  logic signed [DATA_W-1:0] q   [M];
  logic signed [DATA_W-1:0] agg [M];
  logic [M-1:0]             sat;

  always_comb begin
    for (int r = 0; r < M; r++) col_acc[r] = '0;
    col_bias = '0;
    for (int s = 0; s < NUM_SA; s++)
      for (int c = 0; c < SA_COLS; c++)
        if (int'(dr_cnt) == s*SA_COLS + c) begin
          for (int r = 0; r < M; r++) col_acc[r] = res[s][r][c];
          col_bias = bias_drain[s*SA_COLS + c];
        end
  end

  gsm_relu #(.M(M), .DATA_W(DATA_W), .ACC_W(ACC_W), .W_FRAC(W_FRAC)) u_relu (
    .acc  (col_acc),
    .bias (col_bias),
    .relu (drain_cfg.relu),
    .q    (q),
    .sat  (sat)
  );

  gsm_aggregation #(.M(M), .DATA_W(DATA_W)) u_agg (
    .in_v  (q),
    .out_v (agg)
  );

  always_comb begin
    for (int r = 0; r < M; r++)
      act_wdata[r*DATA_W +: DATA_W] = drain_cfg.agg ? agg[r] : q[r];
  end

  assign act_we    = dr_active && !drain_cfg.last_layer;
  assign act_waddr = ADDR_W'(drain_base + DIM_W'(dr_cnt));
  assign pp_we     = dr_active && drain_cfg.last_layer;
  assign pp_col    = drain_base + DIM_W'(dr_cnt);
  assign pp_data   = act_wdata;
  assign tile_done = dr_active && (int'(dr_cnt) == NCOL-1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dr_active <= 1'b0;
      dr_cnt    <= '0;
    end else if (done[0]) begin
      dr_active <= 1'b1;
      dr_cnt    <= '0;
    end else if (dr_active) begin
      if (int'(dr_cnt) == NCOL-1) dr_active <= 1'b0;
      dr_cnt <= dr_cnt + 1'b1;
    end
  end

  a_bus_width: assert property (@(posedge clk) NCOL * DATA_W == BUS_W);
  a_no_overlap: assert property (@(posedge clk) disable iff (!rst_n) done[0] |-> !dr_active);
endmodule
