// tb_gsm_act_buffer: self-checking test of the activation buffer.
// Writes random words to random addresses of the four banks and reads them
// back with one cycle latency, comparing with a testbench copy; loads the
// channel input rows and checks that BANK_IN returns them transposed (one
// feature of all nodes per address).
module tb_gsm_act_buffer;
  import gsm_pkg::*;
  localparam int M = 4, N2 = 8, D = 64, AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_we, rd_en, we;
  logic [2:0] in_row;
  logic [63:0] in_data;
  bank_e rd_bank, wr_bank;
  logic [AW-1:0] rd_addr, wr_addr;
  logic [31:0] rd_data, wr_data;
  logic [31:0] model [4][D];
  logic [7:0]  hin [M][N2];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gsm_act_buffer #(.M(M), .N2(N2), .DEPTH(D), .ADDR_W(AW)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in_we = 0; rd_en = 0; we = 0; in_row = 0; in_data = 0;
    rd_bank = BANK_A; wr_bank = BANK_A; rd_addr = 0; wr_addr = 0; wr_data = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill every bank
    for (int b = 0; b < 4; b++)
      for (int a = 0; a < D; a++) begin
        we = 1; wr_bank = bank_e'(b); wr_addr = AW'(a); wr_data = $urandom;
        model[b][a] = wr_data;
        @(negedge clk);
      end
    we = 0;
    // channel rows
    for (int m = 0; m < M; m++) begin
      in_we = 1; in_row = 3'(m);
      in_data = {$urandom, $urandom};
      for (int f = 0; f < N2; f++) hin[m][f] = in_data[f*8 +: 8];
      @(negedge clk);
    end
    in_we = 0;
    // random reads mixed with writes
    for (int i = 0; i < 400; i++) begin
      int b, a;
      b = int'($urandom % 5);
      a = (b == 4) ? int'($urandom % N2) : int'($urandom % D);
      rd_en = 1; rd_bank = bank_e'(b); rd_addr = AW'(a);
      we = ($urandom % 2 == 0);
      wr_bank = bank_e'($urandom % 4);
      wr_addr = AW'($urandom % D);
      wr_data = $urandom;
      @(posedge clk);
      #1;
      checks++;
      if (b == 4) begin
        logic [31:0] e;
        for (int m = 0; m < M; m++) e[m*8 +: 8] = hin[m][a];
        if (rd_data !== e) begin
          failures++;
          $display("FAIL: input feature %0d got %h exp %h", a, rd_data, e);
        end
      end else if (rd_data !== model[b][a]) begin
        failures++;
        $display("FAIL: bank %0d addr %0d got %h exp %h", b, a, rd_data, model[b][a]);
      end
      if (we) model[int'(wr_bank)][wr_addr] = wr_data;
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
