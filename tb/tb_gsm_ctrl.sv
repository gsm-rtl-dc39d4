// tb_gsm_ctrl: self-checking test of the control unit.
// The controller runs a reduced model (H1 = 16, H = 8) against a memory model
// whose read data is the word address itself, a real ping-pong weight buffer,
// and a stand-in compute engine that reports each tile drained a random
// number of cycles after its last word. Checked: the read addresses (M input
// rows, then one contiguous run of weight words), the routing of input rows,
// the issued word sequence of every tile (bias, then in_dim weights, with the
// right address read from the buffer, tags, layer descriptor and output
// base), no last word issued while a tile is still draining, one
// post-processing start, and `done`.
module tb_gsm_ctrl;
  import gsm_pkg::*;
  localparam int M = 4, N2 = 8, H1 = 16, H = 8, NCOL = 8, AW = 5;
  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic [31:0] in_base = 32'h100, w_base = 32'h2000;
  logic busy, done, rd_req_valid, rd_req_ready, rd_rsp_valid;
  logic [31:0] rd_req_addr;
  logic in_we, wb_wr_en, wb_commit, wb_wr_free, wb_rd_en, wb_release, wb_rd_ready;
  logic [2:0] in_row;
  logic [AW-1:0] wb_wr_addr, wb_rd_addr;
  logic is_valid, is_bias, is_first, is_last, tile_done, pp_start, pp_done;
  logic [DIM_W-1:0] is_k, is_out_base;
  layer_cfg_t is_cfg;
  logic [63:0] rsp_data, wb_rd_data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  gsm_ctrl #(.M(M), .N2(N2), .H1(H1), .H(H), .NCOL(NCOL), .WB_AW(AW)) dut (.*);

  gsm_weight_buffer #(.DEPTH(H1 + 1), .BUS_W(64), .ADDR_W(AW)) u_wb (
    .clk, .rst_n, .wr_en (wb_wr_en), .wr_addr (wb_wr_addr), .wr_data (rsp_data),
    .wr_commit (wb_commit), .wr_free (wb_wr_free), .rd_en (wb_rd_en),
    .rd_addr (wb_rd_addr), .rd_data (wb_rd_data), .rd_release (wb_release),
    .rd_ready (wb_rd_ready));

  // memory: data = address, latency 2, random ready
  logic        p0v, p1v;
  logic [63:0] p0d, p1d;
  always_ff @(posedge clk) begin
    p0v <= rd_req_valid && rd_req_ready;
    p0d <= 64'(rd_req_addr);
    p1v <= p0v;
    p1d <= p0d;
    rd_req_ready <= ($urandom % 4 != 0);
  end
  assign rd_rsp_valid = p1v;
  assign rsp_data = p1d;

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", s);
    end
  endtask

  // expected read addresses
  int n_req = 0;
  int total;
  always @(posedge clk) if (rd_req_valid && rd_req_ready) begin
    int unsigned e;
    e = (n_req < M) ? in_base + n_req : w_base + (n_req - M);
    chk(rd_req_addr == e, $sformatf("read %0d addr %h exp %h", n_req, rd_req_addr, e));
    n_req++;
  end
  int n_in = 0;
  always @(posedge clk) if (in_we) begin
    chk(int'(in_row) == n_in && rsp_data == 64'(in_base + n_in), "input row routing");
    n_in++;
  end

  // expected issue sequence
  int exp_layer = 0, exp_tile = 0, exp_k = 0, word_addr = 0;
  logic chk_data = 0;
  logic [63:0] exp_data;
  int n_pp = 0;
  logic dactive;
  logic [5:0] dcnt;
  always @(posedge clk) begin
    if (chk_data) chk(wb_rd_data == exp_data, "weight word read from buffer");
    chk_data <= 0;
    if (is_valid) begin
      layer_cfg_t c;
      c = layer_cfg(exp_layer, N2, H1, H);
      chk(is_cfg == c, "layer descriptor");
      chk(int'(is_out_base) == exp_tile * NCOL, "output base");
      chk(is_bias == (exp_k == 0) && is_first == (exp_k == 1) &&
          is_last == (exp_k == int'(c.in_dim)), "tags");
      chk(exp_k == 0 || int'(is_k) == exp_k - 1, "feature index");
      chk(!(is_last && dactive), "last word issued while a tile drains");
      chk_data <= 1;
      exp_data <= 64'(w_base + word_addr);
      word_addr++;
      if (is_last) begin
        exp_k = 0;
        if (exp_tile == int'(c.out_dim) / NCOL - 1) begin
          exp_tile = 0;
          exp_layer++;
        end else exp_tile++;
      end else exp_k++;
    end
  end
  // stand-in engine: tile_done after a random drain time
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dactive <= 1'b0;
      dcnt    <= '0;
    end else if (is_valid && is_last) begin
      dactive <= 1'b1;
      dcnt    <= 6'(2 + $urandom % 20);
    end else if (dactive) begin
      if (dcnt == 0) dactive <= 1'b0;
      else dcnt <= dcnt - 1'b1;
    end
  end
  assign tile_done = dactive && (dcnt == 0);
  // stand-in post-processor
  always @(posedge clk) begin
    pp_done <= pp_start;
    if (pp_start && rst_n) n_pp++;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    total = total_weight_words(N2, H1, H, NCOL);
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    chk(n_req == M + total, $sformatf("read count %0d exp %0d", n_req, M + total));
    chk(word_addr == total, "issued word count");
    chk(exp_layer == NUM_LAYERS, "all layers issued");
    chk(n_in == M, "input rows");
    chk(n_pp == 1, $sformatf("one post-processing start (%0d)", n_pp));
    chk(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
