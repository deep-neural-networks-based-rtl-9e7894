// fc_engine_check: reusable self-checking harness around one fc_engine.
//
// Streams NVEC random input vectors through the engine, one weight group per
// clock, back to back on even vectors and with random idle clocks on odd
// ones; each vector uses freshly drawn coefficients. The outputs are compared
// with a plain dot product of the inputs with the approximated weights
// w(n, g, x) = sum_k c[n][g][k] * x^k, x = 0..NW-1, computed here. Also
// checked: grp_idx names the group expected next, and out_valid rises exactly
// one clock after the edge that accepts a vector's last group.
module fc_engine_check #(
  parameter int N_IN  = 192,
  parameter int N_OUT = 10,
  parameter int NW    = 6,
  parameter int SUB   = 3,
  parameter int ORDER = 1,
  parameter int NVEC  = 4
) (
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int NC   = ORDER + 1;
  localparam int NGRP = N_IN / NW;
  localparam int GI_W = (NGRP > 1) ? $clog2(NGRP) : 1;

  logic clk = 1'b0;
  logic rst_n;
  logic grp_valid;
  logic signed [7:0]  grp_y    [NW];
  logic signed [7:0]  grp_coef [N_OUT][NC];
  logic [GI_W-1:0]    grp_idx;
  logic               out_valid;
  logic signed [31:0] out_f    [N_OUT];

  fc_engine #(.N_IN(N_IN), .N_OUT(N_OUT), .NW(NW), .SUB(SUB), .ORDER(ORDER)) u_dut (
    .clk(clk), .rst_n(rst_n), .grp_valid(grp_valid), .grp_y(grp_y),
    .grp_coef(grp_coef), .grp_idx(grp_idx), .out_valid(out_valid), .out_f(out_f));

  always #5 clk = ~clk;

  int     y    [N_IN];
  int     coef [N_OUT][NGRP][NC];
  longint expf [N_OUT];
  logic   exp_valid;
  int     vectors_seen;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL N_IN=%0d NW=%0d ORDER=%0d %s: got %0d expected %0d",
               N_IN, NW, ORDER, what, got, exp);
    end
  endtask

  task automatic compute_reference();
    for (int n = 0; n < N_OUT; n++) begin
      expf[n] = 0;
      for (int g = 0; g < NGRP; g++)
        for (int x = 0; x < NW; x++) begin
          longint w;
          w = 0;
          for (int k = 0; k < NC; k++) w += longint'(coef[n][g][k]) * (longint'(x) ** k);
          expf[n] += w * longint'(y[g*NW + x]);
        end
    end
  endtask

  // Called at a falling edge: checks what the last rising edge produced.
  task automatic check_outputs();
    check("out_valid timing", longint'(out_valid), longint'(exp_valid));
    if (out_valid && exp_valid) begin
      vectors_seen++;
      for (int n = 0; n < N_OUT; n++)
        check($sformatf("neuron %0d", n), longint'(out_f[n]), expf[n]);
    end
    exp_valid = 1'b0;
  endtask

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
    vectors_seen = 0;
    exp_valid = 1'b0;
    rst_n = 1'b0;
    grp_valid = 1'b0;
    for (int i = 0; i < NW; i++) grp_y[i] = '0;
    for (int n = 0; n < N_OUT; n++)
      for (int k = 0; k < NC; k++) grp_coef[n][k] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int v = 0; v < NVEC; v++) begin
      for (int i = 0; i < N_IN; i++)
        y[i] = (v == 0) ? ((i % 2 != 0) ? 127 : -128) : int'($signed(8'($urandom)));
      for (int n = 0; n < N_OUT; n++)
        for (int g = 0; g < NGRP; g++)
          for (int k = 0; k < NC; k++)
            coef[n][g][k] = (v == 0) ? -128 : int'($signed(8'($urandom)));
      for (int g = 0; g < NGRP; g++) begin
        check("grp_idx", longint'(grp_idx), longint'(g));
        grp_valid = 1'b1;
        for (int i = 0; i < NW; i++) grp_y[i] = 8'(y[g*NW + i]);
        for (int n = 0; n < N_OUT; n++)
          for (int k = 0; k < NC; k++) grp_coef[n][k] = 8'(coef[n][g][k]);
        @(negedge clk);
        if (g == NGRP - 1) begin
          compute_reference();
          exp_valid = 1'b1;
        end
        check_outputs();
        grp_valid = 1'b0;
        for (int i = 0; i < NW; i++) grp_y[i] = 8'($urandom);
        if (v % 2 == 1) begin
          repeat ($urandom_range(0, 2)) begin
            @(negedge clk);
            check_outputs();
          end
        end
      end
    end
    repeat (2) begin
      @(negedge clk);
      check_outputs();
    end
    check("number of output vectors", longint'(vectors_seen), longint'(NVEC));
    done = 1'b1;
  end

endmodule
