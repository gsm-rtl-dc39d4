// tb_gsm_accel_full: one complete inference of the full-size GNN accelerator.
//
// The accelerator is instantiated with all parameters at their defaults
// (M = 4 nodes, N = 4 antennas, hidden widths 1024 and 512, two 4x4 systolic
// arrays, 8-bit data). The external memory model answers every request with
// latency 3 and no back-pressure, as a streaming DRAM controller would. The
// output words and power scale are compared with gsm_tb_pkg::gnn_ref, and the
// cycle count with the off-chip traffic (at least one cycle per 64-bit word,
// and inside the 386,284 to 588,280 cycle range reported for the 8-bit
// design). The test
// also counts how often each mechanism happened (ping-pong use of both weight
// banks, waits for weights, waits for the drain of a tile, memory
// back-pressure, aggregation write-backs, concatenated reads, saturation,
// output back-pressure) and fails if any never occurred.
module tb_gsm_accel_full;
  import gsm_pkg::*;
  import gsm_tb_pkg::*;

  localparam int M = 4, N = 4, H1 = 1024, H = 512, WF = 6;
  localparam int NRUNS = 1;
  localparam int STALL = 0;
  localparam int WATCHDOG = 1000000;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  logic [31:0] in_base, w_base, out_base, p_budget;
  logic rd_req_valid, rd_req_ready, rd_rsp_valid, wr_valid, wr_ready;
  logic [31:0] rd_req_addr, wr_addr;
  logic [63:0] rd_rsp_data, wr_data;
  int checks = 0, failures = 0;
  longint cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  gsm_accel dut (
    .clk, .rst_n, .start, .busy, .done, .in_base, .w_base, .out_base, .p_budget,
    .mem_rd_req_valid (rd_req_valid), .mem_rd_req_ready (rd_req_ready),
    .mem_rd_req_addr  (rd_req_addr),  .mem_rd_rsp_valid (rd_rsp_valid),
    .mem_rd_rsp_data  (rd_rsp_data),
    .mem_wr_valid (wr_valid), .mem_wr_ready (wr_ready),
    .mem_wr_addr  (wr_addr),  .mem_wr_data  (wr_data)
  );

  gsm_offchip_mem #(.LAT(3), .STALL(STALL)) u_mem (
    .clk, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_rsp_valid, .rd_rsp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  // mechanism counters
  int ev_bank0 = 0, ev_bank1 = 0, ev_wait_w = 0, ev_wait_drain = 0, ev_mem_bp = 0;
  int ev_agg = 0, ev_concat = 0, ev_sat = 0, ev_out_bp = 0, ev_layers = 0;
  always @(posedge clk) if (rst_n) begin
    if (dut.u_wbuf.wr_commit && !dut.u_wbuf.wr_sel) ev_bank0++;
    if (dut.u_wbuf.wr_commit &&  dut.u_wbuf.wr_sel) ev_bank1++;
    if (int'(dut.u_ctrl.state) == 2 && !dut.u_ctrl.i_done && !dut.u_ctrl.wb_rd_ready) ev_wait_w++;
    if (int'(dut.u_ctrl.state) == 2 && dut.u_ctrl.wb_rd_ready && !dut.u_ctrl.i_go &&
        dut.u_ctrl.pending) ev_wait_drain++;
    if (rd_req_valid && !rd_req_ready) ev_mem_bp++;
    if (dut.u_engine.act_we && dut.u_engine.drain_cfg.agg) ev_agg++;
    if (dut.u_engine.is_valid && !dut.u_engine.is_bias &&
        dut.u_engine.is_k >= dut.u_engine.is_cfg.split) ev_concat++;
    if (dut.u_engine.dr_active && |dut.u_engine.sat) ev_sat++;
    if (wr_valid && !wr_ready) ev_out_bp++;
    if (dut.u_ctrl.i_go && dut.u_ctrl.is_last && dut.u_ctrl.i_tile == dut.u_ctrl.i_ntiles - 1)
      ev_layers++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic report_event(input int n, input string what);
    $display("  mechanism %-34s : %0d", what, n);
    check(n > 0, {"mechanism never happened: ", what});
  endtask

  initial begin
    #(10 * WATCHDOG);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] rows [MAXM];
    logic [63:0] expw [MAXM];
    int unsigned exp_scale, words;
    longint t0, cycles;
    int n_words;
    in_base = 32'h10; out_base = 32'h20; w_base = 32'h1000; p_budget = 32'd40000;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    for (int run = 0; run < NRUNS; run++) begin
      // random channel, weight location and power budget
      for (int m = 0; m < MAXM; m++) begin
        rows[m] = '0;
        for (int f = 0; f < 2*N; f++) rows[m][f*8 +: 8] = 8'($urandom);
        if (m < M) u_mem.store[in_base + 32'(m)] = rows[m];
      end
      w_base   = 32'h1000 + 32'($urandom % 5000);
      p_budget = (run == 0) ? 32'd40000 : 32'd2000 + ($urandom % 200000);
      gnn_ref(M, N, H1, H, WF, rows, w_base, p_budget, expw, exp_scale, words);
      n_words = total_weight_words(2*N, H1, H, 8);
      check(int'(words) == n_words, "reference and package agree on the weight word count");
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      t0 = cyc;
      while (!done) @(posedge clk);
      cycles = cyc - t0;
      @(negedge clk);
      for (int m = 0; m < M; m++) begin
        logic [63:0] got;
        got = u_mem.store.exists(out_base + 32'(m)) ? u_mem.store[out_base + 32'(m)] : '1;
        if (got !== expw[m]) $display("  run %0d stream %0d got %h exp %h", run, m, got, expw[m]);
        check(got === expw[m], "beamforming output word");
        u_mem.store.delete(out_base + 32'(m));
      end
      check(int'(dut.u_post.scale) == int'(exp_scale), "power scale");
      check(!busy, "idle after done");
      // memory-bound: one off-chip word per cycle at best
      check(cycles >= longint'(n_words) + longint'(M), "not faster than the off-chip port");
      check(cycles <= 2 * longint'(n_words) + 4000, "cycle count within bound");
      check(cycles >= 386284 && cycles <= 588280, "latency inside the reported 8-bit range");
      $display("  run %0d: %0d weight words, %0d cycles, scale %0d", run, n_words, cycles, exp_scale);
    end
    report_event(ev_bank0, "ping-pong bank 0 filled");
    report_event(ev_bank1, "ping-pong bank 1 filled");
    report_event(ev_wait_w, "issue waits for weights");
    report_event(ev_wait_drain, "issue waits for tile drain");
    report_event(ev_agg, "aggregation write-back");
    report_event(ev_concat, "combination reads from x_agg");
    report_event(ev_sat, "requantisation saturation");
    check(ev_layers == NRUNS * NUM_LAYERS, "11 layers per inference");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
