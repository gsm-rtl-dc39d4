// tb_gsm_aggregation: self-checking test of the leave-one-out max pooling.
// Random signed vectors (including ties and all-equal cases) are applied;
// each node's output must be the maximum over the other nodes, computed here
// by sorting-free brute force, and must not depend on the input order.
module tb_gsm_aggregation;
  localparam int M = 4;
  logic signed [7:0] in_v [M];
  logic signed [7:0] out_v [M];
  int checks = 0, failures = 0;

  gsm_aggregation #(.M(M), .DATA_W(8)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < M; i++)
        in_v[i] = (t % 7 == 0) ? 8'sd5 : ((t % 3 == 0) ? 8'(int'($urandom % 5) - 2) : 8'($urandom));
      #1;
      for (int i = 0; i < M; i++) begin
        int e;
        e = -1000;
        for (int j = 0; j < M; j++) if (j != i && int'(in_v[j]) > e) e = int'(in_v[j]);
        checks++;
        if (int'(out_v[i]) != e) begin
          failures++;
          $display("FAIL: node %0d got %0d exp %0d", i, out_v[i], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
