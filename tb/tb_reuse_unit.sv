// tb_reuse_unit: self-checking test of the computational-reuse unit.
//
// Three instances are checked against sums computed here from their
// definition, d_k = sum_i (X0+i)^k * y[i]:
//   * a 5-wide linear row (one row of a 5x5 filter);
//   * a 3-wide linear row at offset 3 (sub-block R2 of a 9-weight FC group,
//     d0 = y3+y4+y5, d1 = 3y3+4y4+5y5);
//   * a 5-wide quadratic row (d2 = y1+4y2+9y3+16y4).
// Inputs include the extreme values -128 and 127. Combinational, so each
// vector is checked after a short delay.
module tb_reuse_unit;

  localparam int DW = 8;

  logic signed [DW-1:0] ya [5];
  logic signed [DW-1:0] yb [3];
  logic signed [DW-1:0] yc [5];
  logic signed [dnn_pkg::d_width(4, 1, DW)-1:0] da [2];
  logic signed [dnn_pkg::d_width(5, 1, DW)-1:0] db [2];
  logic signed [dnn_pkg::d_width(4, 2, DW)-1:0] dc [3];

  reuse_unit #(.N(5), .X0(0), .ORDER(1)) u_a (.y(ya), .d(da));
  reuse_unit #(.N(3), .X0(3), .ORDER(1)) u_b (.y(yb), .d(db));
  reuse_unit #(.N(5), .X0(0), .ORDER(2)) u_c (.y(yc), .d(dc));

  int checks = 0, failures = 0;

  function automatic int ref_d(int y[], int x0, int k);
    int s = 0;
    for (int i = 0; i < y.size(); i++) s += ((x0 + i) ** k) * y[i];
    return s;
  endfunction

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int rnd8(int t);
    // Mostly random, with extremes every few vectors.
    case (t % 7)
      0: return -128;
      1: return 127;
      default: return int'($signed(8'($urandom)));
    endcase
  endfunction

  initial begin
    int a[], b[], c[];
    a = new[5];
    b = new[3];
    c = new[5];
    for (int t = 0; t < 400; t++) begin
      for (int i = 0; i < 5; i++) begin
        a[i] = (t < 2) ? ((t == 0) ? -128 : 127) : rnd8(t + i);
        c[i] = (t < 2) ? ((t == 0) ? 127 : -128) : rnd8(t * 3 + i);
        ya[i] = DW'(a[i]);
        yc[i] = DW'(c[i]);
      end
      for (int i = 0; i < 3; i++) begin
        b[i] = rnd8(t * 5 + i);
        yb[i] = DW'(b[i]);
      end
      #1;
      for (int k = 0; k < 2; k++) begin
        check($sformatf("5-wide linear d%0d", k), int'(da[k]), ref_d(a, 0, k));
        check($sformatf("R2 offset-3 d%0d", k), int'(db[k]), ref_d(b, 3, k));
      end
      for (int k = 0; k < 3; k++)
        check($sformatf("quadratic d%0d", k), int'(dc[k]), ref_d(c, 0, k));
    end
    // Figure example: d0 = y0+y1+y2, d1 = y1 + 2*y2 for the first 3 inputs.
    ya = '{8'sd1, 8'sd2, 8'sd3, 8'sd0, 8'sd0};
    #1;
    check("example d0", int'(da[0]), 6);
    check("example d1", int'(da[1]), 8);
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
