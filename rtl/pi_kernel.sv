// pi_kernel: Monte Carlo pi sampling kernel (one parallel unit).
//
// Takes a random point (x, y) in the unit square, both W-bit unsigned
// fractions in [0,1), and tests whether it lies outside the unit circle:
// out = (x*x + y*y > 1). The structure and the widths follow the paper's
// figure of the pi block: two 18x18 multipliers with 36-bit products, a
// 37-bit sum and a ">1?" comparison giving one bit to the data collector.
// "1" is 2^(2W) in the 2W-bit fraction format of the products.
// Timing: three register stages (products, sum, compare); in_valid travels
// with the data, so out/out_valid appear three clocks after x/y/in_valid.
// The pipeline depth is this design's choice (the paper only says the
// processing is pipelined and the pipeline is short).
module pi_kernel #(
  parameter int W = 18
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         in_valid,
  input  logic [W-1:0] x,
  input  logic [W-1:0] y,
  output logic         out_valid,
  output logic         out        // 1: outside the circle
);
  localparam logic [2*W:0] ONE = (2*W+1)'(1) << (2*W);

  logic [2*W-1:0] xx, yy;
  logic [2*W:0]   r2;
  logic [1:0]     v;

  always_ff @(posedge clk) begin
    xx  <= x * x;
    yy  <= y * y;
    r2  <= {1'b0, xx} + {1'b0, yy};
    out <= (r2 > ONE);
    if (rst) begin
      v         <= '0;
      out_valid <= 1'b0;
    end else begin
      v         <= {v[0], in_valid};
      out_valid <= v[1];
    end
  end
endmodule
