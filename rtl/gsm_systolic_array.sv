// gsm_systolic_array: ROWS x COLS grid of gsm_pe computing Y = X * W.
//
// Row r receives the activations of graph node r (one feature per cycle,
// already skewed by r cycles); column c receives the weights of output neuron
// c (skewed by c cycles) with their valid/first/last tags. Activations move
// right and weights move down, so PE(r,c) meets x_r[k] and w_c[k] at the same
// cycle, k+r+c after the unskewed stream. res[r][c] holds the dot product of
// node r and neuron c. `done` rises one cycle after the bottom-right PE has
// captured its result, which is when every PE of the grid holds its result.
// The 4x4 grid is the one drawn in the paper's microarchitecture figure; the
// dataflow is this design's choice.
module gsm_systolic_array #(
  parameter int ROWS   = 4,
  parameter int COLS   = 4,
  parameter int DATA_W = 8,
  parameter int ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] x_left [ROWS],
  input  logic signed [DATA_W-1:0] w_top  [COLS],
  input  logic                     v_top  [COLS],
  input  logic                     f_top  [COLS],
  input  logic                     l_top  [COLS],
  output logic signed [ACC_W-1:0]  res    [ROWS][COLS],
  output logic                     done
);
  // x_h[r][c] is the activation entering PE(r,c) from the left.
  logic signed [DATA_W-1:0] x_h [ROWS][COLS+1];
  // w_v[r][c] etc. enter PE(r,c) from above.
  logic signed [DATA_W-1:0] w_v [ROWS+1][COLS];
  logic                     v_v [ROWS+1][COLS];
  logic                     f_v [ROWS+1][COLS];
  logic                     l_v [ROWS+1][COLS];

  for (genvar r = 0; r < ROWS; r++) begin : g_left
    assign x_h[r][0] = x_left[r];
  end
  for (genvar c = 0; c < COLS; c++) begin : g_top
    assign w_v[0][c] = w_top[c];
    assign v_v[0][c] = v_top[c];
    assign f_v[0][c] = f_top[c];
    assign l_v[0][c] = l_top[c];
  end

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      gsm_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .x_in  (x_h[r][c]),
        .w_in  (w_v[r][c]),
        .v_in  (v_v[r][c]),
        .f_in  (f_v[r][c]),
        .l_in  (l_v[r][c]),
        .x_out (x_h[r][c+1]),
        .w_out (w_v[r+1][c]),
        .v_out (v_v[r+1][c]),
        .f_out (f_v[r+1][c]),
        .l_out (l_v[r+1][c]),
        .res   (res[r][c])
      );
    end
  end

  assign done = l_v[ROWS][COLS-1];
endmodule
