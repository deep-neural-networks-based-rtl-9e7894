// conv_pe_array: K x (H-K+1) processing-element array of the convolution
// layer.
//
// Row i of the array belongs to filter row i, column j to output-map row j.
// PE(i,j) multiplies filter row i's coefficients with the sub-computations of
// ifmap row i+j, so the reuse result of one ifmap row is read by all PEs on a
// diagonal (i+j constant) and the coefficients of one filter row by a whole
// array row. Partial sums run down each column, starting at filter row 0;
// the column total is the output-map element (row j) at the current column
// position:
//     col_sum[j] = sum_{i<K} sum_k c[i][k] * d[i+j][k]
//
// Interface: c[K][ORDER+1] coefficients, d[H][ORDER+1] sub-computations of
// the H ifmap rows, col_sum[H-K+1] results. Purely combinational.
//
// The array shape (filter rows by output rows) and the diagonal mapping are
// the paper's; stride 1 without padding is assumed.
module conv_pe_array #(
  parameter int unsigned H      = 28,
  parameter int unsigned K      = 5,
  parameter int unsigned ORDER  = 1,
  parameter int unsigned COEF_W = dnn_pkg::COEF_W,
  parameter int unsigned D_W    = dnn_pkg::d_width(K - 1, ORDER, dnn_pkg::DATA_W),
  parameter int unsigned ACC_W  = dnn_pkg::ACC_W
) (
  input  logic signed [COEF_W-1:0] c       [K][ORDER+1],
  input  logic signed [D_W-1:0]    d       [H][ORDER+1],
  output logic signed [ACC_W-1:0]  col_sum [H-K+1]
);

  localparam int unsigned OUT_ROWS = H - K + 1;

  for (genvar j = 0; j < OUT_ROWS; j++) begin : g_col
    for (genvar i = 0; i < K; i++) begin : g_row
      // pin enters PE(i,j) from the PE above, pout leaves it downwards.
      logic signed [ACC_W-1:0] pin, pout;
      if (i == 0) begin : g_top
        assign pin = '0;
      end else begin : g_chain
        assign pin = g_col[j].g_row[i-1].pout;
      end
      reuse_pe #(
        .ORDER (ORDER),
        .COEF_W(COEF_W),
        .D_W   (D_W),
        .ACC_W (ACC_W)
      ) u_pe (
        .c       (c[i]),
        .d       (d[i+j]),
        .psum_in (pin),
        .psum_out(pout)
      );
    end
    assign col_sum[j] = g_col[j].g_row[K-1].pout;
  end

endmodule
