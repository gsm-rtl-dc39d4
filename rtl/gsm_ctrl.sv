// gsm_ctrl: control unit (finite state machine) of the GNN accelerator.
//
// Sequences one inference: LOAD_IN fetches the M channel rows of the local
// network; RUN walks the 11 FC layers of gsm_pkg::layer_cfg tile by tile;
// POST starts the post-processor and waits for it; then `done` pulses.
// During RUN two independent counters run:
//  * the fetch side requests the words of each tile (bias word, then in_dim
//    weight words, consecutive off-chip addresses from w_base) whenever the
//    ping-pong weight buffer has a free bank, and writes the in-order
//    responses into it, committing the bank when the tile is complete;
//  * the issue side reads a full bank word by word into the compute engine,
//    tagging bias/first/last words, and releases the bank after the last one.
// One tile is computed at a time: the last word of a tile, and the first word
// of a new layer, wait until the engine reports the previous tile drained.
// Memory read interface: request (valid/ready, word address) and in-order
// response (valid, data); the response is always accepted.
// The FSM, tile-by-tile processing and prefetch through the double buffer are
// the paper's; the counters, interface and address map are this design's.
// Several bits of is_cfg and is_out_base are constant at a given size (the
// high bits of the 16-bit dimensions, and fields that no layer sets); they
// come from the fixed layer table and are left in for other sizes.
module gsm_ctrl
  import gsm_pkg::*;
#(
  parameter int M      = 4,
  parameter int N2     = 8,
  parameter int H1     = 1024,
  parameter int H      = 512,
  parameter int NCOL   = 8,
  parameter int WB_AW  = $clog2(H1 + 2)
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  input  logic [31:0]            in_base,
  input  logic [31:0]            w_base,
  output logic                   busy,
  output logic                   done,
  // off-chip read
  output logic                   rd_req_valid,
  input  logic                   rd_req_ready,
  output logic [31:0]            rd_req_addr,
  input  logic                   rd_rsp_valid,
  // response routing
  output logic                   in_we,
  output logic [$clog2(M+1)-1:0] in_row,
  output logic                   wb_wr_en,
  output logic [WB_AW-1:0]       wb_wr_addr,
  output logic                   wb_commit,
  input  logic                   wb_wr_free,
  // weight buffer read / engine issue
  output logic                   wb_rd_en,
  output logic [WB_AW-1:0]       wb_rd_addr,
  output logic                   wb_release,
  input  logic                   wb_rd_ready,
  output logic                   is_valid,
  output logic                   is_bias,
  output logic                   is_first,
  output logic                   is_last,
  output logic [DIM_W-1:0]       is_k,
  output layer_cfg_t             is_cfg,
  output logic [DIM_W-1:0]       is_out_base,
  input  logic                   tile_done,
  // post-processing
  output logic                   pp_start,
  input  logic                   pp_done
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD_IN, S_RUN, S_POST_START, S_POST, S_DONE} state_e;
  state_e state;

  localparam int LW = $clog2(NUM_LAYERS + 1);

  // ------------------------------------------------------------ input load
  logic [$clog2(M+1)-1:0] in_req_cnt, in_rsp_cnt;

  // ------------------------------------------------------------ fetch side
  logic [LW-1:0]    f_layer;
  logic [DIM_W-1:0] f_tile;
  logic [DIM_W-1:0] f_req_cnt, f_rsp_cnt;
  logic [31:0]      f_addr;
  logic             f_active, f_done;
  layer_cfg_t       f_cfg;
  logic [DIM_W-1:0] f_len, f_ntiles;

  // ------------------------------------------------------------ issue side
  logic [LW-1:0]    i_layer;
  logic [DIM_W-1:0] i_tile;
  logic [DIM_W-1:0] i_k;
  logic             i_done, pending;
  layer_cfg_t       i_cfg;
  logic [DIM_W-1:0] i_ntiles;
  logic             i_go;

  always_comb begin
    f_cfg    = layer_cfg(int'(f_layer), N2, H1, H);
    f_len    = f_cfg.in_dim + 1'b1;
    f_ntiles = f_cfg.out_dim / DIM_W'(NCOL);
    i_cfg    = layer_cfg(int'(i_layer), N2, H1, H);
    i_ntiles = i_cfg.out_dim / DIM_W'(NCOL);
  end

  // read request mux
  always_comb begin
    rd_req_valid = 1'b0;
    rd_req_addr  = '0;
    if (state == S_LOAD_IN && int'(in_req_cnt) < M) begin
      rd_req_valid = 1'b1;
      rd_req_addr  = in_base + 32'(in_req_cnt);
    end else if (state == S_RUN && f_active && f_req_cnt < f_len) begin
      rd_req_valid = 1'b1;
      rd_req_addr  = f_addr;
    end
  end

  // response routing
  always_comb begin
    in_we      = (state == S_LOAD_IN) && rd_rsp_valid;
    in_row     = in_rsp_cnt;
    wb_wr_en   = (state == S_RUN) && rd_rsp_valid;
    wb_wr_addr = WB_AW'(f_rsp_cnt);
    wb_commit  = wb_wr_en && (f_rsp_cnt == f_len - 1'b1);
  end

  // issue
  always_comb begin
    i_go = (state == S_RUN) && !i_done && wb_rd_ready &&
           !(pending && i_k == i_cfg.in_dim) &&
           !(pending && i_k == '0 && i_tile == '0);
    wb_rd_en    = i_go;
    wb_rd_addr  = WB_AW'(i_k);
    wb_release  = i_go && (i_k == i_cfg.in_dim);
    is_valid    = i_go;
    is_bias     = (i_k == '0);
    is_first    = (i_k == DIM_W'(1));
    is_last     = (i_k == i_cfg.in_dim);
    is_k        = i_k - 1'b1;
    is_cfg      = i_cfg;
    is_out_base = i_tile * DIM_W'(NCOL);
  end

  assign busy     = (state != S_IDLE);
  assign pp_start = (state == S_POST_START);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      done       <= 1'b0;
      in_req_cnt <= '0;
      in_rsp_cnt <= '0;
      f_layer    <= '0;
      f_tile     <= '0;
      f_req_cnt  <= '0;
      f_rsp_cnt  <= '0;
      f_addr     <= '0;
      f_active   <= 1'b0;
      f_done     <= 1'b0;
      i_layer    <= '0;
      i_tile     <= '0;
      i_k        <= '0;
      i_done     <= 1'b0;
      pending    <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          state      <= S_LOAD_IN;
          in_req_cnt <= '0;
          in_rsp_cnt <= '0;
          f_layer    <= '0;
          f_tile     <= '0;
          f_req_cnt  <= '0;
          f_rsp_cnt  <= '0;
          f_addr     <= w_base;
          f_active   <= 1'b0;
          f_done     <= 1'b0;
          i_layer    <= '0;
          i_tile     <= '0;
          i_k        <= '0;
          i_done     <= 1'b0;
          pending    <= 1'b0;
        end
        S_LOAD_IN: begin
          if (rd_req_valid && rd_req_ready) in_req_cnt <= in_req_cnt + 1'b1;
          if (rd_rsp_valid) begin
            in_rsp_cnt <= in_rsp_cnt + 1'b1;
            if (int'(in_rsp_cnt) == M-1) state <= S_RUN;
          end
        end
        S_RUN: begin
          // fetch side
          if (!f_done && !f_active && wb_wr_free) begin
            f_active  <= 1'b1;
            f_req_cnt <= '0;
            f_rsp_cnt <= '0;
          end
          if (f_active && rd_req_valid && rd_req_ready) begin
            f_req_cnt <= f_req_cnt + 1'b1;
            f_addr    <= f_addr + 1'b1;
          end
          if (rd_rsp_valid) begin
            f_rsp_cnt <= f_rsp_cnt + 1'b1;
            if (wb_commit) begin
              f_active <= 1'b0;
              if (f_tile == f_ntiles - 1'b1) begin
                f_tile <= '0;
                if (int'(f_layer) == NUM_LAYERS-1) f_done <= 1'b1;
                else f_layer <= f_layer + 1'b1;
              end else begin
                f_tile <= f_tile + 1'b1;
              end
            end
          end
          // issue side
          if (tile_done) pending <= 1'b0;
          if (i_go) begin
            if (i_k == i_cfg.in_dim) begin
              i_k     <= '0;
              pending <= 1'b1;
              if (i_tile == i_ntiles - 1'b1) begin
                i_tile <= '0;
                if (int'(i_layer) == NUM_LAYERS-1) i_done <= 1'b1;
                else i_layer <= i_layer + 1'b1;
              end else begin
                i_tile <= i_tile + 1'b1;
              end
            end else begin
              i_k <= i_k + 1'b1;
            end
          end
          if (i_done && !pending) state <= S_POST_START;
        end
        S_POST_START: state <= S_POST;
        S_POST: if (pp_done) state <= S_DONE;
        S_DONE: begin
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_tile_done_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                         tile_done |-> pending);
  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                   (rd_rsp_valid && state == S_RUN) |-> f_active);
endmodule
