// gsm_postproc: output post-processing of the GNN accelerator.
//
// The final FC layer produces, for each of the M streams (graph nodes), 2N
// real values z = [Re w(0..N-1), Im w(0..N-1)]. This block
//  1. collects them (write port from the compute engine, one feature of all
//     nodes per write);
//  2. computes the energy E = sum of z^2 over all M x 2N values, one feature
//     per cycle (2N cycles);
//  3. finds the power-adjustment scale s = sqrt(P / E) by a bitwise search
//     (SCALE_W cycles): s is the largest SCALE_W-bit number with SFRAC
//     fraction bits such that s^2 * E <= P * 2^(2*SFRAC); E = 0 gives s = 0;
//  4. writes one 64-bit word per stream to off-chip memory (M cycles plus
//     back-pressure), holding N complex values as (Re, Im) byte pairs, each
//     round(z * s) saturated to DATA_W bits: the real-to-complex conversion.
// The result meets the satellite's power budget Tr(sum_m w w^H) <= P (P in
// units of the squared output LSB) with near equality. Normalisation, power
// adjustment and real-to-complex conversion are named by the paper; the
// search, the scaling of the whole output and the packing are this design's.
module gsm_postproc
  import gsm_pkg::*;
#(
  parameter int M       = 4,
  parameter int N       = 4,
  parameter int SCALE_W = 16,
  parameter int SFRAC   = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                z_we,
  input  logic [DIM_W-1:0]    z_col,
  input  logic [M*DATA_W-1:0] z_data,
  input  logic                start,
  input  logic [31:0]         p_budget,
  input  logic [31:0]         out_base,
  output logic                wr_valid,
  input  logic                wr_ready,
  output logic [31:0]         wr_addr,
  output logic [BUS_W-1:0]    wr_data,
  output logic                done,
  output logic [SCALE_W-1:0]  scale,
  output logic [31:0]         energy
);
  localparam int N2 = 2 * N;
  typedef enum logic [2:0] {P_IDLE, P_ENERGY, P_SEARCH, P_WRITE, P_DONE} pstate_e;
  pstate_e state;

  logic signed [DATA_W-1:0] z [M][N2];
  logic [$clog2(N2+1)-1:0]  j;
  logic [$clog2(SCALE_W+1)-1:0] b;
  logic [$clog2(M+1)-1:0]   m_cnt;
  logic [31:0]              e_col;
  logic [SCALE_W-1:0]       trial;
  logic [63:0]              lhs, rhs;

  always_comb begin
    e_col = '0;
    for (int m = 0; m < M; m++) begin
      logic signed [2*DATA_W-1:0] sq;
      sq    = z[m][int'(j) % N2] * z[m][int'(j) % N2];
      e_col = e_col + 32'(unsigned'(sq));
    end
    trial = scale | (SCALE_W'(1) << b);
    lhs   = 64'(trial) * 64'(trial) * 64'(energy);
    rhs   = 64'(p_budget) << (2*SFRAC);
  end

  // output word of stream m_cnt
  always_comb begin
    wr_data = '0;
    for (int n = 0; n < N; n++) begin
      for (int p = 0; p < 2; p++) begin
        logic signed [DATA_W+SCALE_W+1:0] v;
        v = (DATA_W+SCALE_W+2)'(z[int'(m_cnt) % M][p*N + n]) * $signed({2'b00, scale});
        v = (v + (DATA_W+SCALE_W+2)'(1 << (SFRAC-1))) >>> SFRAC;
        if (v > (DATA_W+SCALE_W+2)'((1 << (DATA_W-1)) - 1)) v = (DATA_W+SCALE_W+2)'((1 << (DATA_W-1)) - 1);
        else if (v < -(DATA_W+SCALE_W+2)'(1 << (DATA_W-1))) v = -(DATA_W+SCALE_W+2)'(1 << (DATA_W-1));
        wr_data[(2*n+p)*DATA_W +: DATA_W] = DATA_W'(v);
      end
    end
  end

  assign wr_valid = (state == P_WRITE);
  assign wr_addr  = out_base + 32'(m_cnt);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int m = 0; m < M; m++)
        for (int f = 0; f < N2; f++) z[m][f] <= '0;
    end else if (z_we && int'(z_col) < N2) begin
      for (int m = 0; m < M; m++) z[m][int'(z_col) % N2] <= z_data[m*DATA_W +: DATA_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= P_IDLE;
      j      <= '0;
      b      <= '0;
      m_cnt  <= '0;
      scale  <= '0;
      energy <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        P_IDLE: if (start) begin
          state  <= P_ENERGY;
          j      <= '0;
          energy <= '0;
        end
        P_ENERGY: begin
          energy <= energy + e_col;
          j      <= j + 1'b1;
          if (int'(j) == N2-1) begin
            state <= P_SEARCH;
            b     <= ($clog2(SCALE_W+1))'(SCALE_W-1);
            scale <= '0;
          end
        end
        P_SEARCH: begin
          if (energy != 0 && lhs <= rhs) scale <= trial;
          if (b == 0) begin
            state <= P_WRITE;
            m_cnt <= '0;
          end else begin
            b <= b - 1'b1;
          end
        end
        P_WRITE: if (wr_ready) begin
          m_cnt <= m_cnt + 1'b1;
          if (int'(m_cnt) == M-1) state <= P_DONE;
        end
        P_DONE: begin
          done  <= 1'b1;
          state <= P_IDLE;
        end
        default: state <= P_IDLE;
      endcase
    end
  end
endmodule
