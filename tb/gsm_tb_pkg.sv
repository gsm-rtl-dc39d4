// gsm_tb_pkg: shared testbench helpers for the GNN accelerator.
//
// * wword(addr): the content of an off-chip weight word. Weights and biases
//   are not stored anywhere: every byte is a hash of (address, byte lane)
//   mapped to a small signed value in [-11, 11], so any model size can be
//   simulated without data files.
// * gnn_ref(): an independent, algorithm-level model of one inference:
//   input MLP, two graph convolutions (MLP1, leave-one-out max, concatenation,
//   MLP2), output FC, then power normalisation and complex packing. It walks
//   the same off-chip weight layout (per tile: a bias word, then one word per
//   input feature) but not the hardware's bank map or timing.
package gsm_tb_pkg;

  localparam int MAXM = 4;
  localparam int MAXF = 1024;
  typedef byte mat_t [MAXM][MAXF];

  function automatic logic [63:0] wword(int unsigned addr);
    logic [63:0] r;
    int unsigned h;
    for (int b = 0; b < 8; b++) begin
      h = (addr * 32'h9E3779B1) ^ ((b + 1) * 32'h85EBCA77);
      h = h ^ (h >> 15);
      h = h * 32'h2C1B3C6D;
      h = h ^ (h >> 12);
      r[b*8 +: 8] = 8'(int'(h % 23) - 11);
    end
    return r;
  endfunction

  function automatic byte requant(int acc, byte bias, int wfrac, bit relu);
    int v;
    v = acc + (int'(bias) <<< wfrac) + (1 <<< (wfrac - 1));
    v = v >>> wfrac;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    if (relu && v < 0) v = 0;
    return byte'(v);
  endfunction

  // y = FC(x); weights read from addr onwards, addr advanced past the layer.
  function automatic void fc(input mat_t x, input int m_n, input int in_dim,
                             input int out_dim, input bit relu, input int wfrac,
                             inout int unsigned addr, output mat_t y);
    int acc [MAXM][8];
    logic [63:0] bw, ww;
    for (int m = 0; m < MAXM; m++)
      for (int f = 0; f < MAXF; f++) y[m][f] = 0;
    for (int t = 0; t < out_dim / 8; t++) begin
      bw = wword(addr);
      addr++;
      for (int m = 0; m < MAXM; m++)
        for (int j = 0; j < 8; j++) acc[m][j] = 0;
      for (int k = 0; k < in_dim; k++) begin
        ww = wword(addr);
        addr++;
        for (int m = 0; m < m_n; m++)
          for (int j = 0; j < 8; j++)
            acc[m][j] += int'(x[m][k]) * int'($signed(ww[j*8 +: 8]));
      end
      for (int m = 0; m < m_n; m++)
        for (int j = 0; j < 8; j++)
          y[m][t*8 + j] = requant(acc[m][j], byte'(bw[j*8 +: 8]), wfrac, relu);
    end
  endfunction

  // Full inference. in_rows[m] holds node m's 2N input bytes; out_words[m]
  // is the expected output word; z is the final FC output before scaling.
  function automatic void gnn_ref(input int m_n, input int n, input int h1,
                                  input int h, input int wfrac,
                                  input logic [63:0] in_rows [MAXM],
                                  input int unsigned w_base,
                                  input int unsigned p_budget,
                                  output logic [63:0] out_words [MAXM],
                                  output int unsigned scale,
                                  output int unsigned words_used);
    mat_t x, a, t1, u, c, z;
    int unsigned addr;
    longint unsigned e, trial;
    int n2;
    n2 = 2 * n;
    addr = w_base;
    for (int m = 0; m < MAXM; m++)
      for (int f = 0; f < MAXF; f++) x[m][f] = 0;
    for (int m = 0; m < m_n; m++)
      for (int f = 0; f < n2; f++) x[m][f] = byte'(in_rows[m][f*8 +: 8]);
    // input MLP
    fc(x, m_n, n2, h1, 1'b1, wfrac, addr, t1);
    fc(t1, m_n, h1, h, 1'b1, wfrac, addr, a);
    // two graph convolutions
    for (int g = 0; g < 2; g++) begin
      fc(a, m_n, h, h, 1'b1, wfrac, addr, t1);
      fc(t1, m_n, h, h, 1'b1, wfrac, addr, u);
      // combination input: [a, leave-one-out max of u]
      for (int m = 0; m < MAXM; m++)
        for (int f = 0; f < MAXF; f++) c[m][f] = 0;
      for (int m = 0; m < m_n; m++) begin
        for (int f = 0; f < h; f++) begin
          byte mx;
          bit seen;
          mx = 0;
          seen = 0;
          for (int o = 0; o < m_n; o++)
            if (o != m && (!seen || u[o][f] > mx)) begin
              mx = u[o][f];
              seen = 1;
            end
          c[m][f] = a[m][f];
          c[m][h + f] = mx;
        end
      end
      fc(c, m_n, 2*h, h, 1'b1, wfrac, addr, t1);
      fc(t1, m_n, h, h, 1'b1, wfrac, addr, a);
    end
    fc(a, m_n, h, n2, 1'b0, wfrac, addr, z);
    words_used = addr - w_base;
    // power normalisation
    e = 0;
    for (int m = 0; m < m_n; m++)
      for (int f = 0; f < n2; f++) e += longint'(int'(z[m][f]) * int'(z[m][f]));
    scale = 0;
    if (e != 0)
      for (int b = 15; b >= 0; b--) begin
        trial = longint'(scale) | (64'd1 << b);
        if (trial * trial * e <= (longint'(p_budget) << 16)) scale = int'(trial);
      end
    for (int m = 0; m < MAXM; m++) begin
      out_words[m] = '0;
      if (m < m_n)
        for (int k = 0; k < n; k++)
          for (int p = 0; p < 2; p++) begin
            longint v;
            v = (longint'(z[m][p*n + k]) * longint'(scale) + 128) >>> 8;
            if (v > 127) v = 127;
            if (v < -128) v = -128;
            out_words[m][(2*k + p)*8 +: 8] = 8'(v);
          end
    end
  endfunction

endpackage
