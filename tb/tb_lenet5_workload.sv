// tb_lenet5_workload: complete LeNet-5 MNIST inferences (see lenet5_check)
// for the FC group sizes of the evaluated configurations: 6 weights per
// group (the default datapath) and 32, 64, 96 and 192. Each configuration
// runs two images: 78 convolution passes, one FC vector and one
// classification per image, all checked against references computed in the
// harness.
module tb_lenet5_workload;

  localparam int NCFG = 5;
  logic done [NCFG];
  int   chk [NCFG], fail [NCFG], passes [NCFG], cls [NCFG];

  lenet5_check #(.FC_NW(6),   .FC_SUB(3)) u_nw6
    (.done(done[0]), .checks(chk[0]), .failures(fail[0]), .conv_passes(passes[0]), .classes(cls[0]));
  lenet5_check #(.FC_NW(32),  .FC_SUB(4)) u_nw32
    (.done(done[1]), .checks(chk[1]), .failures(fail[1]), .conv_passes(passes[1]), .classes(cls[1]));
  lenet5_check #(.FC_NW(64),  .FC_SUB(4)) u_nw64
    (.done(done[2]), .checks(chk[2]), .failures(fail[2]), .conv_passes(passes[2]), .classes(cls[2]));
  lenet5_check #(.FC_NW(96),  .FC_SUB(3)) u_nw96
    (.done(done[3]), .checks(chk[3]), .failures(fail[3]), .conv_passes(passes[3]), .classes(cls[3]));
  lenet5_check #(.FC_NW(192), .FC_SUB(3)) u_nw192
    (.done(done[4]), .checks(chk[4]), .failures(fail[4]), .conv_passes(passes[4]), .classes(cls[4]));

  function automatic int total(int a [NCFG]);
    int s = 0;
    foreach (a[i]) s += a[i];
    return s;
  endfunction

  initial begin
    int failures;
    #1;  // let the harnesses clear their done flags
    wait (done[0] && done[1] && done[2] && done[3] && done[4]);
    failures = total(fail);
    for (int i = 0; i < NCFG; i++) begin
      $display("configuration %0d: checks=%0d failures=%0d conv passes=%0d classifications=%0d",
               i, chk[i], fail[i], passes[i], cls[i]);
      if (passes[i] != 2 * 78 || cls[i] != 2) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), failures);
    $finish;
  end

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", total(chk), total(fail) + 1);
    $finish;
  end

endmodule
