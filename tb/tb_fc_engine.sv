// tb_fc_engine: self-checking test of the fully connected engine.
//
// Runs the harness fc_engine_check on three engines:
//   * the default: 192 inputs, 10 outputs, linear groups of 6 weights split
//     into two 3-input sub-blocks (the MNIST LeNet-5 output layer);
//   * the 9-weight example: one group of 9 inputs, sub-blocks R1..R3 of 3,
//     three output neurons;
//   * a quadratic engine: 24 inputs, 4 outputs, groups of 8 in two
//     sub-blocks of 4.
module tb_fc_engine;

  logic done_a, done_b, done_c;
  int   ca, fa, cb, fb, cc, fc;

  fc_engine_check #(.N_IN(192), .N_OUT(10), .NW(6), .SUB(3), .ORDER(1), .NVEC(4))
    u_default (.done(done_a), .checks(ca), .failures(fa));
  fc_engine_check #(.N_IN(9), .N_OUT(3), .NW(9), .SUB(3), .ORDER(1), .NVEC(6))
    u_example (.done(done_b), .checks(cb), .failures(fb));
  fc_engine_check #(.N_IN(24), .N_OUT(4), .NW(8), .SUB(4), .ORDER(2), .NVEC(6))
    u_quad (.done(done_c), .checks(cc), .failures(fc));

  initial begin
    #1;  // let the harnesses clear their done flags
    wait (done_a && done_b && done_c);
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb + cc, fa + fb + fc);
    $finish;
  end

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", ca + cb + cc, fa + fb + fc + 1);
    $finish;
  end

endmodule
