// gsm_pkg: types and the layer schedule shared by the GNN inference accelerator.
//
// One GNN (the per-satellite copy of the multi-GNN beamformer) is a chain of 11
// fully connected (FC) layers applied to the M user-terminal nodes in parallel:
//   input MLP      : 2N -> H1 -> H
//   graph conv 1/2 : MLP1 (H -> H -> H, then leave-one-out max aggregation),
//                    combination [x_in, x_agg] (2H) -> MLP2 (2H -> H -> H)
//   output FC      : H -> 2N (no ReLU), then power normalisation.
// The widths (2N*1024, 1024*512, 512*512, 1024*512, 512*2N) are the paper's
// Table II values; the bank assignment and the descriptor layout are this
// design's own choice.
package gsm_pkg;

  localparam int DATA_W = 8;    // 8-bit fixed point (paper value)
  localparam int BUS_W  = 64;   // off-chip data bandwidth (paper value)
  localparam int ACC_W  = 32;   // accumulator width (assumed)
  localparam int DIM_W  = 16;   // width of dimension / address counters
  localparam int NUM_LAYERS = 11;

  // Activation buffer banks. BANK_IN is the transposed channel input.
  typedef enum logic [2:0] {
    BANK_A  = 3'd0,
    BANK_B  = 3'd1,
    BANK_C  = 3'd2,
    BANK_D  = 3'd3,
    BANK_IN = 3'd4
  } bank_e;

  // Descriptor of one FC layer.
  typedef struct packed {
    logic [DIM_W-1:0] in_dim;      // input features per node
    logic [DIM_W-1:0] out_dim;     // output features per node
    logic [DIM_W-1:0] split;       // features read from src; the rest from src2
    bank_e            src;
    bank_e            src2;
    bank_e            dst;
    logic             relu;        // ReLU after requantisation
    logic             agg;         // leave-one-out max aggregation on write-back
    logic             last_layer;  // results go to post-processing
  } layer_cfg_t;

  function automatic layer_cfg_t mk_layer(int in_dim, int out_dim, int split,
                                          bank_e src, bank_e src2, bank_e dst,
                                          bit relu, bit agg, bit last_layer);
    layer_cfg_t c;
    c.in_dim     = DIM_W'(in_dim);
    c.out_dim    = DIM_W'(out_dim);
    c.split      = DIM_W'(split);
    c.src        = src;
    c.src2       = src2;
    c.dst        = dst;
    c.relu       = relu;
    c.agg        = agg;
    c.last_layer = last_layer;
    return c;
  endfunction

  // Layer schedule for n2 = 2N inputs, hidden widths h1 and h.
  // The graph-convolution input lives in B (conv 1) or A (conv 2) and is kept
  // there until the combination step has read it.
  function automatic layer_cfg_t layer_cfg(int l, int n2, int h1, int h);
    case (l)
      0:  return mk_layer(n2,  h1, n2,  BANK_IN, BANK_IN, BANK_A, 1'b1, 1'b0, 1'b0); // MLP FC1
      1:  return mk_layer(h1,  h,  h1,  BANK_A,  BANK_A,  BANK_B, 1'b1, 1'b0, 1'b0); // MLP FC2
      2:  return mk_layer(h,   h,  h,   BANK_B,  BANK_B,  BANK_C, 1'b1, 1'b0, 1'b0); // GC1 MLP1 FC1
      3:  return mk_layer(h,   h,  h,   BANK_C,  BANK_C,  BANK_D, 1'b1, 1'b1, 1'b0); // GC1 MLP1 FC2 + agg
      4:  return mk_layer(2*h, h,  h,   BANK_B,  BANK_D,  BANK_C, 1'b1, 1'b0, 1'b0); // GC1 comb + MLP2 FC1
      5:  return mk_layer(h,   h,  h,   BANK_C,  BANK_C,  BANK_A, 1'b1, 1'b0, 1'b0); // GC1 MLP2 FC2
      6:  return mk_layer(h,   h,  h,   BANK_A,  BANK_A,  BANK_C, 1'b1, 1'b0, 1'b0); // GC2 MLP1 FC1
      7:  return mk_layer(h,   h,  h,   BANK_C,  BANK_C,  BANK_D, 1'b1, 1'b1, 1'b0); // GC2 MLP1 FC2 + agg
      8:  return mk_layer(2*h, h,  h,   BANK_A,  BANK_D,  BANK_C, 1'b1, 1'b0, 1'b0); // GC2 comb + MLP2 FC1
      9:  return mk_layer(h,   h,  h,   BANK_C,  BANK_C,  BANK_B, 1'b1, 1'b0, 1'b0); // GC2 MLP2 FC2
      default:
          return mk_layer(h,   n2, h,   BANK_B,  BANK_B,  BANK_A, 1'b0, 1'b0, 1'b1); // output FC
    endcase
  endfunction

  // Off-chip words needed by one inference: per tile, one bias word followed
  // by in_dim weight words; a tile covers ncol output neurons.
  function automatic int total_weight_words(int n2, int h1, int h, int ncol);
    int s;
    layer_cfg_t c;
    s = 0;
    for (int l = 0; l < NUM_LAYERS; l++) begin
      c = layer_cfg(l, n2, h1, h);
      s += (int'(c.out_dim) / ncol) * (int'(c.in_dim) + 1);
    end
    return s;
  endfunction

endpackage
