// tb_classifier: self-checking test of the arg-max classifier (10 classes,
// 32-bit signed scores). Random scores, all-negative scores, a planted
// maximum at every position and ties (lowest index wins) are checked, as is
// the one-clock latency of out_valid.
module tb_classifier;

  localparam int N = 10, W = 32;

  logic clk = 1'b0;
  logic rst_n, in_valid, out_valid;
  logic signed [W-1:0] scores [N];
  logic [3:0] class_idx;

  classifier u_dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid),
                    .scores(scores), .out_valid(out_valid), .class_idx(class_idx));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  task automatic check(string what, int got, int exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic int ref_argmax();
    int best;
    best = 0;
    for (int n = 1; n < N; n++) if (scores[n] > scores[best]) best = n;
    return best;
  endfunction

  initial begin
    rst_n = 1'b0;
    in_valid = 1'b0;
    for (int n = 0; n < N; n++) scores[n] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 300; t++) begin
      int e;
      for (int n = 0; n < N; n++) begin
        if (t < 100)      scores[n] = $signed($urandom);
        else if (t < 150) scores[n] = -$signed($urandom_range(1, 1000));
        else              scores[n] = $signed($urandom_range(0, 20)) - 10;  // many ties
      end
      if (t < N) scores[t] = 32'sh7fff_ffff;
      e = ref_argmax();
      in_valid = 1'b1;
      @(negedge clk);
      check("out_valid after in_valid", int'(out_valid), 1);
      check($sformatf("class t%0d", t), int'(class_idx), e);
      in_valid = 1'b0;
      for (int n = 0; n < N; n++) scores[n] = $signed($urandom);
      @(negedge clk);
      check("no out_valid without in_valid", int'(out_valid), 0);
      check("class held", int'(class_idx), e);
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
