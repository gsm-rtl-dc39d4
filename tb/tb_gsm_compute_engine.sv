// tb_gsm_compute_engine: self-checking test of the systolic compute engine.
// Drives the engine directly with a three-layer chain of its own:
//   L0: channel input (8 features) -> bank A, 16 outputs, ReLU
//   L1: bank A (16)                -> bank D, 16 outputs, ReLU + max aggregation
//   L2: [bank A, bank D] (32)      -> post-processor port, 8 outputs, no ReLU
// Weights and biases are random; tiles are issued word by word with the
// weight word presented one cycle after its issue, as the weight buffer does.
// Checked: the final-layer outputs against a testbench model (L2 reads what
// L0 and L1 wrote into banks A and D, so errors there show up in its
// outputs), and the drain timing: tile_done comes exactly
// M + SA_COLS + NCOL cycles after the last word is issued.
module tb_gsm_compute_engine;
  import gsm_pkg::*;
  localparam int M = 4, N2 = 8, D = 64, SC = 4, NS = 2, NCOL = 8, WF = 6;
  logic clk = 1'b0, rst_n = 1'b0;
  logic in_we, is_valid, is_bias, is_first, is_last, tile_done, pp_we;
  logic [2:0] in_row;
  logic [63:0] in_data, w_data;
  logic [DIM_W-1:0] is_k, is_out_base, pp_col;
  layer_cfg_t is_cfg;
  logic [31:0] pp_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gsm_compute_engine #(.M(M), .N2(N2), .DEPTH(D), .SA_COLS(SC), .NUM_SA(NS), .W_FRAC(WF)) dut (.*);

  byte x0 [M][8];
  byte a1 [M][16];
  byte u1 [M][16];
  byte g1 [M][16];
  byte zz [M][8];
  byte got [M][8];
  logic [63:0] wts [3][4][33];   // layer, tile, word (0 = bias)
  logic [63:0] w_next;

  always_ff @(posedge clk) w_data <= w_next;
  always @(posedge clk) if (pp_we && rst_n)
    for (int m = 0; m < M; m++) got[m][int'(pp_col) % 8] = byte'(pp_data[m*8 +: 8]);

  function automatic byte rq(int acc, byte b, bit relu);
    int v;
    v = (acc + (int'(b) <<< WF) + (1 <<< (WF-1))) >>> WF;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    if (relu && v < 0) v = 0;
    return byte'(v);
  endfunction

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", s);
    end
  endtask

  task automatic run_layer(input int l, input layer_cfg_t c);
    for (int t = 0; t < int'(c.out_dim) / NCOL; t++) begin
      int t_last, t_done;
      for (int k = 0; k <= int'(c.in_dim); k++) begin
        @(negedge clk);
        is_valid = 1; is_bias = (k == 0); is_first = (k == 1);
        is_last = (k == int'(c.in_dim)); is_k = DIM_W'(k - 1);
        is_cfg = c; is_out_base = DIM_W'(t * NCOL);
        w_next = wts[l][t][k];
      end
      t_last = 0;
      @(negedge clk);
      is_valid = 0; is_bias = 0; is_first = 0; is_last = 0;
      t_last = 1;
      while (!tile_done) begin
        @(negedge clk);
        t_last++;
      end
      chk(t_last == M + SC + NCOL, $sformatf("drain timing %0d", t_last));
      @(negedge clk);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    layer_cfg_t c0, c1, c2;
    in_we = 0; in_row = 0; in_data = 0; is_valid = 0; is_bias = 0; is_first = 0;
    is_last = 0; is_k = 0; is_cfg = '0; is_out_base = 0; w_next = 0;
    c0 = mk_layer(8, 16, 8, BANK_IN, BANK_IN, BANK_A, 1, 0, 0);
    c1 = mk_layer(16, 16, 16, BANK_A, BANK_A, BANK_D, 1, 1, 0);
    c2 = mk_layer(32, 8, 16, BANK_A, BANK_D, BANK_B, 0, 0, 1);
    for (int r = 0; r < 4; r++) begin
      for (int l = 0; l < 3; l++)
        for (int t = 0; t < 4; t++)
          for (int k = 0; k < 33; k++) wts[l][t][k] = {$urandom, $urandom};
      for (int m = 0; m < M; m++)
        for (int f = 0; f < 8; f++) x0[m][f] = byte'($urandom);
      // model
      for (int m = 0; m < M; m++) begin
        for (int j = 0; j < 16; j++) begin
          int s;
          s = 0;
          for (int k = 0; k < 8; k++) s += int'(x0[m][k]) * int'($signed(wts[0][j/8][k+1][(j%8)*8 +: 8]));
          a1[m][j] = rq(s, byte'(wts[0][j/8][0][(j%8)*8 +: 8]), 1);
        end
      end
      for (int m = 0; m < M; m++)
        for (int j = 0; j < 16; j++) begin
          int s;
          s = 0;
          for (int k = 0; k < 16; k++) s += int'(a1[m][k]) * int'($signed(wts[1][j/8][k+1][(j%8)*8 +: 8]));
          u1[m][j] = rq(s, byte'(wts[1][j/8][0][(j%8)*8 +: 8]), 1);
        end
      for (int m = 0; m < M; m++)
        for (int j = 0; j < 16; j++) begin
          byte mx;
          mx = -128;
          for (int o = 0; o < M; o++) if (o != m && u1[o][j] > mx) mx = u1[o][j];
          g1[m][j] = mx;
        end
      for (int m = 0; m < M; m++)
        for (int j = 0; j < 8; j++) begin
          int s;
          s = 0;
          for (int k = 0; k < 32; k++)
            s += ((k < 16) ? int'(a1[m][k]) : int'(g1[m][k-16])) * int'($signed(wts[2][0][k+1][j*8 +: 8]));
          zz[m][j] = rq(s, byte'(wts[2][0][0][j*8 +: 8]), 0);
        end
      // drive
      if (r == 0) begin
        repeat (2) @(negedge clk);
        rst_n = 1;
      end
      for (int m = 0; m < M; m++) begin
        @(negedge clk);
        in_we = 1; in_row = 3'(m);
        for (int f = 0; f < 8; f++) in_data[f*8 +: 8] = x0[m][f];
      end
      @(negedge clk);
      in_we = 0;
      run_layer(0, c0);
      run_layer(1, c1);
      run_layer(2, c2);
      for (int m = 0; m < M; m++)
        for (int j = 0; j < 8; j++)
          chk(got[m][j] == zz[m][j], $sformatf("run %0d node %0d out %0d: %0d exp %0d", r, m, j, got[m][j], zz[m][j]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
