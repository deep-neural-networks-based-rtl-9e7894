// tb_conv_engine: self-checking test of the convolution engine.
//
// Runs the checking harness conv_engine_check on two engines:
//   * the default engine, a 28-row ifmap with 5x5 linear filters (the 5 x 24
//     PE array of the MNIST LeNet-5 first layer);
//   * a quadratic engine on a 10-row ifmap with 5x5 filters (6 x 6 output);
//   * a 3x3-filter engine on a 10-row ifmap (the 3 x 8 PE array example);
//   * a 3x3-filter engine on a 5-row ifmap (3 x 3 output, the smallest
//     worked example).
// Each frame checks every output element and the one-clock output timing.
module tb_conv_engine;

  logic done_a, done_b, done_c, done_d;
  int   checks_a, failures_a, checks_b, failures_b;
  int   checks_c, failures_c, checks_d, failures_d;

  conv_engine_check #(.H(28), .K(5), .ORDER(1), .NFRAMES(4)) u_lin
    (.done(done_a), .checks(checks_a), .failures(failures_a));
  conv_engine_check #(.H(10), .K(5), .ORDER(2), .NFRAMES(4)) u_quad
    (.done(done_b), .checks(checks_b), .failures(failures_b));
  conv_engine_check #(.H(10), .K(3), .ORDER(1), .NFRAMES(4)) u_k3
    (.done(done_c), .checks(checks_c), .failures(failures_c));
  conv_engine_check #(.H(5), .K(3), .ORDER(1), .NFRAMES(4)) u_small
    (.done(done_d), .checks(checks_d), .failures(failures_d));

  initial begin
    #1;  // let the harnesses clear their done flags
    wait (done_a && done_b && done_c && done_d);
    $display("TB_RESULT checks=%0d failures=%0d",
             checks_a + checks_b + checks_c + checks_d,
             failures_a + failures_b + failures_c + failures_d);
    $finish;
  end

  initial begin
    #200000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d",
             checks_a + checks_b + checks_c + checks_d,
             failures_a + failures_b + failures_c + failures_d + 1);
    $finish;
  end

endmodule
