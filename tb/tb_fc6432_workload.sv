// tb_fc6432_workload: the layers of the fully connected MNIST network
// (784 -> 64 -> 32 -> 10) run through the FC engine at the group sizes of
// each approximation case.
//
// Cases 1-4 are linear and 5-7 quadratic. Group sizes per layer:
//   case 1: 8 / 8 / 8     case 2: 16 / 16 / -    case 3: 24 / 4 / -
//   case 4: 28 / 4 / -    case 5: 28 / 8 / -     case 6: 28 / 16 / -
//   case 7: 32 / 8 / -    ('-' = plain weights)
// A layer with plain weights is an engine with groups of one weight and
// ORDER = 0, so w = c0. 784 is a multiple of neither 24 nor 32, so the first
// layers of cases 3 and 7 are built for 792 inputs (33 groups of 24) and 800
// inputs (25 groups of 32), as if the image were padded. Each group is split into sub-blocks of
// 4 (2 for the 4-weight groups, 6 for 24, 7 for 28), a choice of this test.
// Layers that occur in more than one case are run once. Each engine is checked
// by fc_engine_check against plain dot products with the expanded weights;
// the inputs are random, not the activations of a trained network.
module tb_fc6432_workload;

  localparam int NE = 13;

  logic done [NE];
  int   chk  [NE];
  int   fail [NE];

  // First layer, 784 inputs, 64 neurons.
  fc_engine_check #(.N_IN(784), .N_OUT(64), .NW(8),  .SUB(4), .ORDER(1), .NVEC(2))
    u_fc1_c1  (.done(done[0]),  .checks(chk[0]),  .failures(fail[0]));
  fc_engine_check #(.N_IN(784), .N_OUT(64), .NW(16), .SUB(4), .ORDER(1), .NVEC(2))
    u_fc1_c2  (.done(done[1]),  .checks(chk[1]),  .failures(fail[1]));
  fc_engine_check #(.N_IN(792), .N_OUT(64), .NW(24), .SUB(6), .ORDER(1), .NVEC(2))
    u_fc1_c3  (.done(done[2]),  .checks(chk[2]),  .failures(fail[2]));
  fc_engine_check #(.N_IN(784), .N_OUT(64), .NW(28), .SUB(7), .ORDER(1), .NVEC(2))
    u_fc1_c4  (.done(done[3]),  .checks(chk[3]),  .failures(fail[3]));
  fc_engine_check #(.N_IN(784), .N_OUT(64), .NW(28), .SUB(7), .ORDER(2), .NVEC(2))
    u_fc1_c56 (.done(done[4]),  .checks(chk[4]),  .failures(fail[4]));
  fc_engine_check #(.N_IN(800), .N_OUT(64), .NW(32), .SUB(4), .ORDER(2), .NVEC(2))
    u_fc1_c7  (.done(done[5]),  .checks(chk[5]),  .failures(fail[5]));
  // Second layer, 64 inputs, 32 neurons.
  fc_engine_check #(.N_IN(64),  .N_OUT(32), .NW(8),  .SUB(4), .ORDER(1), .NVEC(3))
    u_fc2_c1  (.done(done[6]),  .checks(chk[6]),  .failures(fail[6]));
  fc_engine_check #(.N_IN(64),  .N_OUT(32), .NW(16), .SUB(4), .ORDER(1), .NVEC(3))
    u_fc2_c2  (.done(done[7]),  .checks(chk[7]),  .failures(fail[7]));
  fc_engine_check #(.N_IN(64),  .N_OUT(32), .NW(4),  .SUB(2), .ORDER(1), .NVEC(3))
    u_fc2_c34 (.done(done[8]),  .checks(chk[8]),  .failures(fail[8]));
  fc_engine_check #(.N_IN(64),  .N_OUT(32), .NW(8),  .SUB(4), .ORDER(2), .NVEC(3))
    u_fc2_c57 (.done(done[9]),  .checks(chk[9]),  .failures(fail[9]));
  fc_engine_check #(.N_IN(64),  .N_OUT(32), .NW(16), .SUB(4), .ORDER(2), .NVEC(3))
    u_fc2_c6  (.done(done[10]), .checks(chk[10]), .failures(fail[10]));
  // Output layer, 32 inputs, 10 neurons.
  fc_engine_check #(.N_IN(32),  .N_OUT(10), .NW(8),  .SUB(4), .ORDER(1), .NVEC(3))
    u_fc3_c1  (.done(done[11]), .checks(chk[11]), .failures(fail[11]));
  fc_engine_check #(.N_IN(32),  .N_OUT(10), .NW(1),  .SUB(1), .ORDER(0), .NVEC(3))
    u_fc3_plain (.done(done[12]), .checks(chk[12]), .failures(fail[12]));

  function automatic bit all_done();
    for (int e = 0; e < NE; e++) if (!done[e]) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    int checks, failures;
    #1;  // let the harnesses clear their done flags
    while (!all_done()) #100;
    checks = 0;
    failures = 0;
    for (int e = 0; e < NE; e++) begin
      checks += chk[e];
      failures += fail[e];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    $display("watchdog expired");
    $display("TB_RESULT checks=0 failures=1");
    $finish;
  end

endmodule
