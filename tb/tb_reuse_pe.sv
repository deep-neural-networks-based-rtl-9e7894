// tb_reuse_pe: self-checking test of the processing element,
// psum_out = psum_in + sum_k c[k]*d[k], for a linear (two-multiplier) and a
// quadratic (three-multiplier) PE, with random signed operands and extremes.
module tb_reuse_pe;

  localparam int CW = 8, DW = 12, AW = 32;

  logic signed [CW-1:0] c1 [2];
  logic signed [DW-1:0] d1 [2];
  logic signed [CW-1:0] c2 [3];
  logic signed [DW-1:0] d2 [3];
  logic signed [AW-1:0] pin1, pout1, pin2, pout2;

  reuse_pe #(.ORDER(1), .COEF_W(CW), .D_W(DW), .ACC_W(AW)) u_lin
    (.c(c1), .d(d1), .psum_in(pin1), .psum_out(pout1));
  reuse_pe #(.ORDER(2), .COEF_W(CW), .D_W(DW), .ACC_W(AW)) u_quad
    (.c(c2), .d(d2), .psum_in(pin2), .psum_out(pout2));

  int checks = 0, failures = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    for (int t = 0; t < 500; t++) begin
      longint e1, e2;
      pin1 = (t == 0) ? 32'sd0 : $signed($urandom_range(0, 2000000)) - 1000000;
      pin2 = $signed($urandom_range(0, 2000000)) - 1000000;
      e1 = pin1;
      e2 = pin2;
      for (int k = 0; k < 3; k++) begin
        logic signed [CW-1:0] cv;
        logic signed [DW-1:0] dv;
        cv = (t == 1) ? -8'sd128 : CW'($urandom);
        dv = (t == 1) ? -12'sd2048 : DW'($urandom);
        if (k < 2) begin
          c1[k] = cv;
          d1[k] = dv;
          e1 += longint'(cv) * longint'(dv);
        end
        c2[k] = cv;
        d2[k] = ~dv;
        e2 += longint'(cv) * longint'(~dv);
      end
      #1;
      check("linear PE", longint'(pout1), e1);
      check("quadratic PE", longint'(pout2), e2);
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
