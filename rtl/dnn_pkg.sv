// dnn_pkg: widths and helper functions shared by the approximate-weight
// inference datapath.
//
// Every weight group of the network is replaced by the coefficients of a
// fitted polynomial w(x) = c0 + c1*x (+ c2*x^2), x = 0..NW-1. A dot product
// over one group then factors into sum_k c_k * d_k with d_k = sum_x x^k*y_x.
// The d_k ("sub-computations") depend only on the input data, so they are
// computed once and shared by every processing element that needs them.
//
// The 8-bit coefficient width follows the paper's 8-bit fixed-point weights;
// the 8-bit signed activation width and the 32-bit partial-sum width are this
// design's own choices.
package dnn_pkg;

  localparam int unsigned DATA_W = 8;   // activation width (signed)
  localparam int unsigned COEF_W = 8;   // coefficient width (signed)
  localparam int unsigned ACC_W  = 32;  // partial sum / accumulator width

  // Largest sum of |x^k| over x = 0 .. xmax, k = 0 .. order.
  function automatic longint unsigned max_weight_sum(int unsigned xmax,
                                                     int unsigned order);
    longint unsigned best = 0;
    for (int unsigned k = 0; k <= order; k++) begin
      longint unsigned s = 0;
      for (int unsigned x = 0; x <= xmax; x++) begin
        longint unsigned p = 1;
        for (int unsigned e = 0; e < k; e++) p = p * x;
        s = s + p;
      end
      if (s > best) best = s;
    end
    return best;
  endfunction

  // Width of a signed sub-computation d_k built from data_w-bit signed
  // inputs with integer weights x^k, x = 0 .. xmax. Never overflows.
  function automatic int unsigned d_width(int unsigned xmax,
                                          int unsigned order,
                                          int unsigned data_w);
    return data_w + $clog2(max_weight_sum(xmax, order) + 1);
  endfunction

endpackage
