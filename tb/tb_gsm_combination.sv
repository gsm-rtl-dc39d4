// tb_gsm_combination: self-checking test of the concatenation mapping.
// For the two layer shapes that use it (a plain FC with split = in_dim and
// a combination layer with split = H) every feature index is mapped and the
// bank and address compared with the expected concatenation [x_in, x_agg].
module tb_gsm_combination;
  import gsm_pkg::*;
  logic [DIM_W-1:0] k, split;
  bank_e src, src2, rd_bank;
  logic [9:0] rd_addr;
  int checks = 0, failures = 0;

  gsm_combination #(.ADDR_W(10)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < NUM_LAYERS; l++) begin
      layer_cfg_t c;
      c = layer_cfg(l, 8, 1024, 512);
      split = c.split; src = c.src; src2 = c.src2;
      for (int i = 0; i < int'(c.in_dim); i++) begin
        bank_e eb;
        int ea;
        k = DIM_W'(i);
        #1;
        if (l == 4 || l == 8) begin
          eb = (i < 512) ? c.src : BANK_D;
          ea = (i < 512) ? i : i - 512;
        end else begin
          eb = c.src;
          ea = i;
        end
        checks++;
        if (rd_bank !== eb || int'(rd_addr) != ea) begin
          failures++;
          $display("FAIL: layer %0d k %0d -> bank %0d addr %0d", l, i, rd_bank, rd_addr);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
