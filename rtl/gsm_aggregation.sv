// gsm_aggregation: permutation-invariant neighbour aggregation.
//
// For one output feature of all M nodes, node i receives the element-wise
// maximum of the same feature of every other node (max-pooling over the
// neighbours M \ i of the fully connected UT graph). The paper sets the
// aggregation to max-pooling applied after an MLP; here the block sits on the
// write-back path of that MLP's last FC layer, so it costs no extra pass. With
// a single node there is no neighbour and the output is zero (a choice of
// this design). Purely combinational; values are signed DATA_W-bit.
module gsm_aggregation #(
  parameter int M      = 4,
  parameter int DATA_W = 8
) (
  input  logic signed [DATA_W-1:0] in_v  [M],
  output logic signed [DATA_W-1:0] out_v [M]
);
  always_comb begin
    for (int i = 0; i < M; i++) begin
      logic signed [DATA_W-1:0] mx;
      logic                     seen;
      mx   = '0;
      seen = 1'b0;
      for (int j = 0; j < M; j++) begin
        if (j != i && (!seen || in_v[j] > mx)) begin
          mx   = in_v[j];
          seen = 1'b1;
        end
      end
      out_v[i] = mx;
    end
  end
endmodule
