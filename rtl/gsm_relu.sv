// gsm_relu: bias, requantisation and ReLU for one output neuron of all nodes.
//
// Input: the M accumulator values of one output neuron (products of 8-bit
// activations and 8-bit weights with W_FRAC fraction bits) and the neuron's
// 8-bit bias in activation format. The bias is aligned (shifted left by
// W_FRAC) and added, the sum is rounded (half up) and shifted back to the
// activation format, saturated to DATA_W bits and, when `relu` is set,
// clamped at zero. `sat` flags the nodes whose value saturated. Purely
// combinational. ReLU on every FC layer except the last and the 8-bit
// format follow the paper; the fraction split, rounding and saturation are
// this design's choice.
module gsm_relu #(
  parameter int M      = 4,
  parameter int DATA_W = 8,
  parameter int ACC_W  = 32,
  parameter int W_FRAC = 6
) (
  input  logic signed [ACC_W-1:0]  acc  [M],
  input  logic signed [DATA_W-1:0] bias,
  input  logic                     relu,
  output logic signed [DATA_W-1:0] q    [M],
  output logic [M-1:0]             sat
);
  localparam logic signed [ACC_W-1:0] QMAX = ACC_W'((1 <<< (DATA_W-1)) - 1);
  localparam logic signed [ACC_W-1:0] QMIN = -ACC_W'(1 <<< (DATA_W-1));

  always_comb begin
    for (int m = 0; m < M; m++) begin
      logic signed [ACC_W-1:0] v;
      v = acc[m] + (ACC_W'(bias) <<< W_FRAC) + ACC_W'(1 <<< (W_FRAC-1));
      v = v >>> W_FRAC;
      sat[m] = 1'b0;
      if (v > QMAX) begin
        v = QMAX;
        sat[m] = 1'b1;
      end else if (v < QMIN) begin
        v = QMIN;
        sat[m] = 1'b1;
      end
      if (relu && v < 0) v = '0;
      q[m] = DATA_W'(v);
    end
  end
endmodule
