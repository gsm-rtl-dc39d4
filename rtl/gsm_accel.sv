// gsm_accel: GNN inference accelerator for distributed satellite beamforming.
//
// One instance runs on each satellite: from the local channel vectors of the
// M user terminals (the graph nodes) it infers that satellite's M beamforming
// vectors with the GNN of gsm_pkg (input MLP, two graph convolutions with max
// aggregation and concatenation, output FC), 8-bit fixed point throughout.
// Blocks: control unit (gsm_ctrl), ping-pong weight buffer
// (gsm_weight_buffer), systolic-array compute engine with its activation
// double buffer, ReLU, aggregation and combination (gsm_compute_engine), and
// output post-processing (gsm_postproc). All weights stream once per
// inference over the 64-bit off-chip port; activations never leave the chip.
//
// Off-chip memory map (64-bit word addresses, all set by the host):
//   in_base + m  : channel of node m, bytes 0..N-1 Re h(0..N-1), N..2N-1 Im
//   w_base ...   : for each layer, for each tile of NCOL outputs: one bias
//                  word (byte j = bias of output j) then in_dim weight words
//                  (word k, byte j = W[k][tile*NCOL+j])
//   out_base + m : beamforming vector of stream m, bytes (2n, 2n+1) =
//                  (Re, Im) of antenna n
// Interface: pulse `start`; `done` pulses when the output is written.
// Timing: memory-bound, about one cycle per weight word
// (gsm_pkg::total_weight_words) plus a few cycles per tile.
// The structure follows the paper's microarchitecture figure; the address map
// and the handshakes are this design's own.
module gsm_accel
  import gsm_pkg::*;
#(
  parameter int M       = 4,
  parameter int N       = 4,
  parameter int H1      = 1024,
  parameter int H       = 512,
  parameter int SA_COLS = 4,
  parameter int NUM_SA  = 2,
  parameter int W_FRAC  = 6
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  output logic             busy,
  output logic             done,
  input  logic [31:0]      in_base,
  input  logic [31:0]      w_base,
  input  logic [31:0]      out_base,
  input  logic [31:0]      p_budget,
  // off-chip memory read port
  output logic             mem_rd_req_valid,
  input  logic             mem_rd_req_ready,
  output logic [31:0]      mem_rd_req_addr,
  input  logic             mem_rd_rsp_valid,
  input  logic [BUS_W-1:0] mem_rd_rsp_data,
  // off-chip memory write port
  output logic             mem_wr_valid,
  input  logic             mem_wr_ready,
  output logic [31:0]      mem_wr_addr,
  output logic [BUS_W-1:0] mem_wr_data
);
  localparam int N2    = 2 * N;
  localparam int NCOL  = NUM_SA * SA_COLS;
  localparam int WB_D  = H1 + 1;
  localparam int WB_AW = $clog2(H1 + 2);
  localparam int ACT_D = (H1 > 2*H) ? H1 : 2*H;

  logic                   in_we;
  logic [$clog2(M+1)-1:0] in_row;
  logic                   wb_wr_en, wb_commit, wb_wr_free;
  logic [WB_AW-1:0]       wb_wr_addr, wb_rd_addr;
  logic                   wb_rd_en, wb_release, wb_rd_ready;
  logic [BUS_W-1:0]       wb_rd_data;
  logic                   is_valid, is_bias, is_first, is_last;
  logic [DIM_W-1:0]       is_k, is_out_base;
  layer_cfg_t             is_cfg;
  logic                   tile_done;
  logic                   pp_we, pp_start, pp_done;
  logic [DIM_W-1:0]       pp_col;
  logic [M*DATA_W-1:0]    pp_data;
  logic [15:0]            pp_scale;
  logic [31:0]            pp_energy;

  gsm_ctrl #(.M(M), .N2(N2), .H1(H1), .H(H), .NCOL(NCOL), .WB_AW(WB_AW)) u_ctrl (
    .clk          (clk),
    .rst_n        (rst_n),
    .start        (start),
    .in_base      (in_base),
    .w_base       (w_base),
    .busy         (busy),
    .done         (done),
    .rd_req_valid (mem_rd_req_valid),
    .rd_req_ready (mem_rd_req_ready),
    .rd_req_addr  (mem_rd_req_addr),
    .rd_rsp_valid (mem_rd_rsp_valid),
    .in_we        (in_we),
    .in_row       (in_row),
    .wb_wr_en     (wb_wr_en),
    .wb_wr_addr   (wb_wr_addr),
    .wb_commit    (wb_commit),
    .wb_wr_free   (wb_wr_free),
    .wb_rd_en     (wb_rd_en),
    .wb_rd_addr   (wb_rd_addr),
    .wb_release   (wb_release),
    .wb_rd_ready  (wb_rd_ready),
    .is_valid     (is_valid),
    .is_bias      (is_bias),
    .is_first     (is_first),
    .is_last      (is_last),
    .is_k         (is_k),
    .is_cfg       (is_cfg),
    .is_out_base  (is_out_base),
    .tile_done    (tile_done),
    .pp_start     (pp_start),
    .pp_done      (pp_done)
  );

  gsm_weight_buffer #(.DEPTH(WB_D), .BUS_W(BUS_W), .ADDR_W(WB_AW)) u_wbuf (
    .clk        (clk),
    .rst_n      (rst_n),
    .wr_en      (wb_wr_en),
    .wr_addr    (wb_wr_addr),
    .wr_data    (mem_rd_rsp_data),
    .wr_commit  (wb_commit),
    .wr_free    (wb_wr_free),
    .rd_en      (wb_rd_en),
    .rd_addr    (wb_rd_addr),
    .rd_data    (wb_rd_data),
    .rd_release (wb_release),
    .rd_ready   (wb_rd_ready)
  );

  gsm_compute_engine #(.M(M), .N2(N2), .DEPTH(ACT_D), .SA_COLS(SA_COLS),
                       .NUM_SA(NUM_SA), .W_FRAC(W_FRAC)) u_engine (
    .clk         (clk),
    .rst_n       (rst_n),
    .in_we       (in_we),
    .in_row      (in_row),
    .in_data     (mem_rd_rsp_data),
    .is_valid    (is_valid),
    .is_bias     (is_bias),
    .is_first    (is_first),
    .is_last     (is_last),
    .is_k        (is_k),
    .is_cfg      (is_cfg),
    .is_out_base (is_out_base),
    .w_data      (wb_rd_data),
    .tile_done   (tile_done),
    .pp_we       (pp_we),
    .pp_col      (pp_col),
    .pp_data     (pp_data)
  );

  gsm_postproc #(.M(M), .N(N), .SCALE_W(16), .SFRAC(8)) u_post (
    .clk      (clk),
    .rst_n    (rst_n),
    .z_we     (pp_we),
    .z_col    (pp_col),
    .z_data   (pp_data),
    .start    (pp_start),
    .p_budget (p_budget),
    .out_base (out_base),
    .wr_valid (mem_wr_valid),
    .wr_ready (mem_wr_ready),
    .wr_addr  (mem_wr_addr),
    .wr_data  (mem_wr_data),
    .done     (pp_done),
    .scale    (pp_scale),
    .energy   (pp_energy)
  );
endmodule
