// tb_gsm_pe: self-checking test of one processing element.
// Random dot products of random length are streamed through the PE with
// random valid gaps; the result captured on the last tag is compared with a
// sum computed in the testbench, and the pass-through registers are checked
// to delay x, w and the tags by exactly one cycle.
module tb_gsm_pe;
  logic clk = 1'b0, rst_n = 1'b0;
  logic signed [7:0] x_in, w_in, x_out, w_out;
  logic v_in, f_in, l_in, v_out, f_out, l_out;
  logic signed [31:0] res;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gsm_pe #(.DATA_W(8), .ACC_W(32)) dut (.*);

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int exp;
    x_in = 0; w_in = 0; v_in = 0; f_in = 0; l_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 40; t++) begin
      int len;
      len = 1 + int'($urandom % 20);
      exp = 0;
      for (int k = 0; k < len; k++) begin
        // random idle gap
        while ($urandom % 4 == 0) begin
          @(negedge clk);
          v_in = 0; f_in = 0; l_in = 0;
        end
        @(negedge clk);
        x_in = 8'($urandom);
        w_in = 8'($urandom);
        v_in = 1;
        f_in = (k == 0);
        l_in = (k == len - 1);
        exp += int'(x_in) * int'(w_in);
        @(posedge clk);
        #1;
        checks++;
        if (x_out !== x_in || w_out !== w_in || v_out !== 1'b1 ||
            f_out !== (k == 0) || l_out !== (k == len - 1)) begin
          failures++;
          $display("FAIL: pass-through registers");
        end
      end
      @(negedge clk);
      v_in = 0; f_in = 0; l_in = 0;
      checks++;
      if (res !== exp) begin
        failures++;
        $display("FAIL: tile %0d res %0d exp %0d", t, res, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
