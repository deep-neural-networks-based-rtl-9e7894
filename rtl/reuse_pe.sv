// reuse_pe: processing element of the computational-reuse arrays.
//
// psum_out = psum_in + sum_{k=0}^{ORDER} c[k] * d[k]
//
// c[k] are the approximation coefficients of the PE's filter row or weight
// group, d[k] the sub-computations of the data row it reads. In the linear
// case (ORDER=1) this is two multipliers and one adder, as the paper draws
// the PE; the extra addition of psum_in implements the vertical partial-sum
// accumulation down a PE column. ORDER=2 (quadratic fit) adds a third
// multiplier.
//
// Interface: all signed; purely combinational, the engines register the
// column results. ACC_W is this design's choice (32 bits); products are
// sign-extended to ACC_W before they are added.
module reuse_pe #(
  parameter int unsigned ORDER  = 1,
  parameter int unsigned COEF_W = dnn_pkg::COEF_W,
  parameter int unsigned D_W    = 16,
  parameter int unsigned ACC_W  = dnn_pkg::ACC_W
) (
  input  logic signed [COEF_W-1:0] c [ORDER+1],
  input  logic signed [D_W-1:0]    d [ORDER+1],
  input  logic signed [ACC_W-1:0]  psum_in,
  output logic signed [ACC_W-1:0]  psum_out
);

  logic signed [COEF_W+D_W-1:0] prod [ORDER+1];

  always_comb begin
    psum_out = psum_in;
    for (int unsigned k = 0; k <= ORDER; k++) begin
      prod[k]  = c[k] * d[k];
      psum_out = psum_out + ACC_W'(prod[k]);
    end
  end

endmodule
