// tb_gsm_systolic_array: self-checking test of the 4x4 systolic array.
// Random matrices X (4 x K) and W (K x 4) are fed with the row/column skew
// the array expects, back to back for several tiles; each tile's result grid
// is compared with X*W computed in the testbench. Also checks that `done`
// rises exactly K + ROWS + COLS - 1 cycles after the first word.
module tb_gsm_systolic_array;
  localparam int R = 4, C = 4;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [7:0] x_left [R];
  logic signed [7:0] w_top [C];
  logic v_top [C], f_top [C], l_top [C];
  logic signed [31:0] res [R][C];
  logic done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gsm_systolic_array #(.ROWS(R), .COLS(C)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  byte X [R][64];
  byte W [64][C];
  int  K;

  initial begin
    for (int r = 0; r < R; r++) x_left[r] = 0;
    for (int c = 0; c < C; c++) begin
      w_top[c] = 0; v_top[c] = 0; f_top[c] = 0; l_top[c] = 0;
    end
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 12; t++) begin
      int t_start, t_done;
      K = 2 + int'($urandom % 30);
      for (int k = 0; k < K; k++) begin
        for (int r = 0; r < R; r++) X[r][k] = byte'($urandom);
        for (int c = 0; c < C; c++) W[k][c] = byte'($urandom);
      end
      t_start = -1;
      // skewed feed: at step s, row r gets X[r][s-r], column c gets W[s-c][c]
      for (int s = 0; s < K + R + C; s++) begin
        @(negedge clk);
        for (int r = 0; r < R; r++) x_left[r] = (s - r >= 0 && s - r < K) ? X[r][s-r] : 8'sd0;
        for (int c = 0; c < C; c++) begin
          bit act;
          act = (s - c >= 0 && s - c < K);
          w_top[c] = act ? W[s-c][c] : 8'sd0;
          v_top[c] = act;
          f_top[c] = act && (s - c == 0);
          l_top[c] = act && (s - c == K - 1);
        end
        if (s == 0) t_start = s;
        @(posedge clk);
        #1;
        if (done) begin
          t_done = s;
          checks++;
          if (t_done != K + R + C - 3) begin
            failures++;
            $display("FAIL: done at step %0d, expected %0d", t_done, K + R + C - 3);
          end
        end
      end
      for (int r = 0; r < R; r++)
        for (int c = 0; c < C; c++) begin
          int e;
          e = 0;
          for (int k = 0; k < K; k++) e += int'(X[r][k]) * int'(W[k][c]);
          checks++;
          if (res[r][c] !== e) begin
            failures++;
            $display("FAIL: tile %0d res[%0d][%0d]=%0d exp %0d", t, r, c, res[r][c], e);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
