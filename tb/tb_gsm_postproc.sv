// tb_gsm_postproc: self-checking test of power normalisation and packing.
// Random final-layer outputs z (M x 2N) are written in, the block is started
// with a random power budget, and the written words are compared with a
// testbench computation of s = floor-search sqrt(P/E) and round(z*s)
// saturated, packed as (Re, Im) pairs. The write port is stalled at random.
// Also checks the scale, the energy, the all-zero case and the latency
// without stalls: 2N energy cycles + 16 search cycles + M writes + 2.
module tb_gsm_postproc;
  import gsm_pkg::*;
  localparam int M = 4, N = 4, N2 = 8;
  logic clk = 1'b0, rst_n = 1'b0;
  logic z_we, start, wr_valid, wr_ready, done;
  logic [DIM_W-1:0] z_col;
  logic [31:0] z_data, p_budget, out_base, wr_addr, energy;
  logic [63:0] wr_data;
  logic [15:0] scale;
  int checks = 0, failures = 0;
  byte z [M][N2];

  always #5 clk = ~clk;

  gsm_postproc #(.M(M), .N(N), .SCALE_W(16), .SFRAC(8)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", s);
    end
  endtask

  initial begin
    z_we = 0; start = 0; z_col = 0; z_data = 0; p_budget = 0; out_base = 32'h40; wr_ready = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      longint unsigned e, s, tr;
      int cyc, nw;
      bit stall;
      stall = (t % 2 == 1);
      for (int m = 0; m < M; m++)
        for (int f = 0; f < N2; f++)
          z[m][f] = (t == 5) ? 8'sd0 : ((t % 3 == 0) ? 8'($urandom) : 8'(int'($urandom % 21) - 10));
      for (int f = 0; f < N2; f++) begin
        @(negedge clk);
        z_we = 1; z_col = DIM_W'(f);
        for (int m = 0; m < M; m++) z_data[m*8 +: 8] = z[m][f];
      end
      @(negedge clk);
      z_we = 0;
      p_budget = 32'($urandom % 300000);
      e = 0;
      for (int m = 0; m < M; m++)
        for (int f = 0; f < N2; f++) e += longint'(int'(z[m][f]) * int'(z[m][f]));
      s = 0;
      if (e != 0)
        for (int b = 15; b >= 0; b--) begin
          tr = s | (64'd1 << b);
          if (tr * tr * e <= (longint'(p_budget) << 16)) s = tr;
        end
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      nw = 0;
      while (!done) begin
        wr_ready = stall ? ($urandom % 2 == 0) : 1'b1;
        @(posedge clk);
        if (wr_valid && wr_ready) begin
          logic [63:0] ew;
          for (int n = 0; n < N; n++)
            for (int p = 0; p < 2; p++) begin
              longint v;
              v = (longint'(z[nw][p*N + n]) * longint'(s) + 128) >>> 8;
              if (v > 127) v = 127;
              if (v < -128) v = -128;
              ew[(2*n + p)*8 +: 8] = 8'(v);
            end
          chk(wr_addr == out_base + 32'(nw), "output address");
          chk(wr_data === ew, $sformatf("output word %0d: got %h exp %h", nw, wr_data, ew));
          nw++;
        end
        @(negedge clk);
        cyc++;
      end
      chk(nw == M, "one word per stream");
      chk(longint'(energy) == e, "energy");
      chk(longint'(scale) == s, $sformatf("scale got %0d exp %0d", scale, s));
      if (!stall) chk(cyc == N2 + 16 + M + 2, $sformatf("latency %0d", cyc));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
