// gsm_pe: one processing element of the systolic array.
//
// Output-stationary multiply-accumulate. Each cycle the PE registers the
// activation it received from the left (x) and passes it right, and registers
// the weight received from above (w) together with its tags and passes them
// down. When the valid tag is set it adds x*w to its accumulator; the first
// tag restarts the accumulation, the last tag also copies the finished sum to
// `res`, which then holds until the next last tag. Latency: one cycle per hop.
// The paper describes the PE only by its job (partial product, accumulate,
// pass to neighbours); the tags and the output-stationary form are this
// design's choice.
module gsm_pe #(
  parameter int DATA_W = 8,
  parameter int ACC_W  = 32
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic signed [DATA_W-1:0] x_in,
  input  logic signed [DATA_W-1:0] w_in,
  input  logic                     v_in,
  input  logic                     f_in,
  input  logic                     l_in,
  output logic signed [DATA_W-1:0] x_out,
  output logic signed [DATA_W-1:0] w_out,
  output logic                     v_out,
  output logic                     f_out,
  output logic                     l_out,
  output logic signed [ACC_W-1:0]  res
);
  logic signed [2*DATA_W-1:0] prod;
  logic signed [ACC_W-1:0]    acc, sum;

  always_comb begin
    prod = x_in * w_in;
    sum  = (f_in ? ACC_W'(0) : acc) + ACC_W'(prod);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      x_out <= '0;
      w_out <= '0;
      v_out <= 1'b0;
      f_out <= 1'b0;
      l_out <= 1'b0;
      acc   <= '0;
      res   <= '0;
    end else begin
      x_out <= x_in;
      w_out <= w_in;
      v_out <= v_in;
      f_out <= f_in & v_in;
      l_out <= l_in & v_in;
      if (v_in) begin
        acc <= sum;
        if (l_in) res <= sum;
      end
    end
  end
endmodule
