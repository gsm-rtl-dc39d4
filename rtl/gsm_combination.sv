// gsm_combination: combination step of a graph-convolution layer.
//
// The second MLP of a graph convolution takes, for every node, its own
// graph-convolution input x_in (H features) followed by the aggregated
// neighbour features x_agg (H features): a concatenation to 2H = 1024
// features, matching the 1024*512 FC of the paper's Table II. The
// concatenation costs no data movement: this block maps the feature index k
// the systolic array asks for to the bank and address holding it, x_in for
// k < split and x_agg (at k - split) above. For a plain FC layer split equals
// in_dim and every feature comes from src. Purely combinational.
// Using concatenation as the combination operation is an assumption: the
// paper names the operation but not its form.
module gsm_combination
  import gsm_pkg::*;
#(
  parameter int ADDR_W = 10
) (
  input  logic [DIM_W-1:0]  k,
  input  logic [DIM_W-1:0]  split,
  input  bank_e             src,
  input  bank_e             src2,
  output bank_e             rd_bank,
  output logic [ADDR_W-1:0] rd_addr
);
  always_comb begin
    if (k < split) begin
      rd_bank = src;
      rd_addr = ADDR_W'(k);
    end else begin
      rd_bank = src2;
      rd_addr = ADDR_W'(k - split);
    end
  end
endmodule
