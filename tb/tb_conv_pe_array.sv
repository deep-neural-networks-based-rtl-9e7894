// tb_conv_pe_array: self-checking test of the convolution PE array at its
// default size (5 filter rows by 24 output rows, 28 ifmap rows).
//
// Random coefficients and sub-computations are applied; every column sum is
// compared with sum_i sum_k c[i][k] * d[i+j][k] worked out here. A second
// phase puts a single non-zero d on one ifmap row to check that the row
// reaches exactly the PEs of its diagonal.
module tb_conv_pe_array;

  localparam int H = 28, K = 5, NC = 2, CW = 8, AW = 32;
  localparam int DW = dnn_pkg::d_width(K - 1, 1, dnn_pkg::DATA_W);
  localparam int OR = H - K + 1;

  logic signed [CW-1:0] c [K][NC];
  logic signed [DW-1:0] d [H][NC];
  logic signed [AW-1:0] col_sum [OR];

  conv_pe_array u_dut (.c(c), .d(d), .col_sum(col_sum));

  int checks = 0, failures = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < 50; t++) begin
      for (int i = 0; i < K; i++)
        for (int k = 0; k < NC; k++) c[i][k] = CW'($urandom);
      for (int r = 0; r < H; r++)
        for (int k = 0; k < NC; k++) d[r][k] = DW'($urandom);
      #1;
      for (int j = 0; j < OR; j++) begin
        longint e;
        e = 0;
        for (int i = 0; i < K; i++)
          for (int k = 0; k < NC; k++) e += longint'(c[i][k]) * longint'(d[i+j][k]);
        check($sformatf("t%0d column sum %0d", t, j), longint'(col_sum[j]), e);
      end
    end
    // Diagonal reuse: only ifmap row r non-zero; filter row i has c0 = i+1.
    for (int i = 0; i < K; i++) begin
      c[i][0] = CW'(i + 1);
      c[i][1] = '0;
    end
    for (int r = 0; r < H; r++) begin
      for (int rr = 0; rr < H; rr++)
        for (int k = 0; k < NC; k++) d[rr][k] = '0;
      d[r][0] = DW'(1);
      #1;
      for (int j = 0; j < OR; j++) begin
        int i;
        i = r - j;
        check($sformatf("diag row %0d col %0d", r, j), longint'(col_sum[j]),
              (i >= 0 && i < K) ? i + 1 : 0);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
