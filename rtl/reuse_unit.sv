// reuse_unit: computational-reuse block for one group of N inputs.
//
// With the weights of a group fitted as w(x) = c0 + c1*x (+ c2*x^2), the
// product sum over the group factors as sum_k c_k * d_k, where
//     d_k = sum_{i=0}^{N-1} (X0+i)^k * y[i],   k = 0 .. ORDER.
// For a 3-wide linear filter row this is d0 = y0+y1+y2, d1 = y1+2*y2. The
// d_k depend on the data only, so one reuse unit per input row (convolution)
// or per sub-block of a weight group (fully connected, where X0 is the
// sub-block's offset inside the group) serves every PE that reads that data.
//
// Interface: y[0..N-1] signed DATA_W-bit inputs, d[0..ORDER] signed D_W-bit
// outputs. Purely combinational, no clock. D_W defaults to a width that can
// never overflow.
//
// From the paper: the factorisation and the d0/d1 formulas (linear) and the
// x^2-weighted sum (quadratic). Own choices: data width, signed arithmetic,
// leaving the constant multiplies to synthesis instead of hand-built adders.
module reuse_unit #(
  parameter int unsigned N      = 5,
  parameter int unsigned X0     = 0,
  parameter int unsigned ORDER  = 1,
  parameter int unsigned DATA_W = dnn_pkg::DATA_W,
  parameter int unsigned D_W    = dnn_pkg::d_width(X0 + N - 1, ORDER, DATA_W)
) (
  input  logic signed [DATA_W-1:0] y [N],
  output logic signed [D_W-1:0]    d [ORDER+1]
);

  // Integer weight (X0+i)^k of input i in sub-computation k.
  function automatic logic [D_W-1:0] xpow(int unsigned i, int unsigned k);
    longint unsigned p = 1;
    for (int unsigned e = 0; e < k; e++) p = p * (64'(X0) + 64'(i));
    return D_W'(p);
  endfunction

  always_comb begin
    for (int unsigned k = 0; k <= ORDER; k++) begin
      logic [D_W-1:0] acc;
      acc = '0;
      for (int unsigned i = 0; i < N; i++) begin
        // Sign-extend the input, then multiply by a constant. The result is
        // exact modulo 2^D_W, and D_W holds the full range.
        acc = acc + D_W'(y[i]) * xpow(i, k);
      end
      d[k] = signed'(acc);
    end
  end

endmodule
