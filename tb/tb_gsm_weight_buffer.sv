// tb_gsm_weight_buffer: self-checking test of the ping-pong weight buffer.
// A producer fills tiles of random length into the buffer whenever its bank
// is free, while a consumer reads the other bank with random pauses and
// releases it. Every word read is compared with the word written for that
// tile and position; the flags must let the producer run at most one tile
// ahead of the consumer, and both banks must be used.
module tb_gsm_weight_buffer;
  localparam int D = 64, AW = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic wr_en, wr_commit, wr_free, rd_en, rd_release, rd_ready;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [63:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  int wr_tile = 0, rd_tile = 0, max_ahead = 0, overlap = 0;
  localparam int NT = 30;
  int len [NT];

  always #5 clk = ~clk;

  gsm_weight_buffer #(.DEPTH(D), .BUS_W(64), .ADDR_W(AW)) dut (.*);

  function automatic logic [63:0] pat(int t, int a);
    return {32'(t) ^ 32'hA5A5_0000, 32'(a) * 32'h0101_0101};
  endfunction

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // producer
  initial begin
    wr_en = 0; wr_commit = 0; wr_addr = 0; wr_data = 0;
    for (int t = 0; t < NT; t++) len[t] = 1 + int'($urandom % D);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < NT; t++) begin
      while (!wr_free) @(negedge clk);
      for (int a = 0; a < len[t]; a++) begin
        wr_en = 1; wr_addr = AW'(a); wr_data = pat(t, a);
        wr_commit = (a == len[t] - 1);
        @(negedge clk);
      end
      wr_en = 0; wr_commit = 0;
      wr_tile++;
    end
  end

  // consumer
  initial begin
    rd_en = 0; rd_release = 0; rd_addr = 0;
    @(posedge rst_n);
    for (int t = 0; t < NT; t++) begin
      @(negedge clk);
      while (!rd_ready) @(negedge clk);
      for (int a = 0; a < len[t]; a++) begin
        while ($urandom % 3 == 0) begin
          rd_en = 0; rd_release = 0;
          @(negedge clk);
        end
        rd_en = 1; rd_addr = AW'(a); rd_release = (a == len[t] - 1);
        if (wr_en) overlap++;
        @(posedge clk);
        #1;
        checks++;
        if (rd_data !== pat(t, a)) begin
          failures++;
          $display("FAIL: tile %0d word %0d got %h", t, a, rd_data);
        end
        @(negedge clk);
        rd_en = 0; rd_release = 0;
      end
      rd_tile++;
      if (wr_tile - rd_tile > max_ahead) max_ahead = wr_tile - rd_tile;
    end
    checks++;
    if (overlap == 0) begin
      failures++;
      $display("FAIL: filling never overlapped reading");
    end
    checks++;
    if (max_ahead > 2) begin
      failures++;
      $display("FAIL: producer ran %0d tiles ahead", max_ahead);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
