// tb_gsm_relu: self-checking test of bias, requantisation and ReLU.
// Random accumulators (small and large, to reach both saturation limits) and
// biases are applied with ReLU on and off; outputs and saturation flags are
// compared with integer arithmetic done in the testbench.
module tb_gsm_relu;
  localparam int M = 4, WF = 6;
  logic signed [31:0] acc [M];
  logic signed [7:0] bias;
  logic relu;
  logic signed [7:0] q [M];
  logic [M-1:0] sat;
  int checks = 0, failures = 0;
  int n_sat = 0, n_clamp = 0;

  gsm_relu #(.M(M), .DATA_W(8), .ACC_W(32), .W_FRAC(WF)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      bias = 8'($urandom);
      relu = t[0];
      for (int m = 0; m < M; m++)
        acc[m] = (t % 4 == 0) ? 32'($urandom) : 32'(int'($urandom % 20000) - 10000);
      #1;
      for (int m = 0; m < M; m++) begin
        longint v;
        bit s;
        v = (longint'(acc[m]) + longint'(bias) * 64 + 32) >>> WF;
        s = 0;
        if (v > 127) begin v = 127; s = 1; end
        if (v < -128) begin v = -128; s = 1; end
        if (relu && v < 0) begin v = 0; n_clamp++; end
        n_sat += s;
        checks++;
        if (int'(q[m]) != int'(v) || sat[m] != s) begin
          failures++;
          $display("FAIL: acc %0d bias %0d relu %0d -> %0d/%0d exp %0d/%0d",
                   acc[m], bias, relu, q[m], sat[m], v, s);
        end
      end
    end
    checks++;
    if (n_sat == 0 || n_clamp == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
