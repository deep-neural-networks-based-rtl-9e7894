// conv_engine_check: reusable self-checking harness around one conv_engine.
//
// For each of NFRAMES frames it loads random filter coefficients (with
// coef_load), then streams a random H x W ifmap one column per clock, with
// idle clocks between columns on odd frames. Outside the load strobe,
// coef_in carries random garbage, to show the coefficients are held. Output
// columns are compared with a direct convolution of the ifmap with the
// approximated weights w(i,x) = sum_k c[i][k]*x^k, computed here. Timing is
// checked too: output column c-K+1 must appear exactly one clock after the
// edge that accepted ifmap column c, and never otherwise.
module conv_engine_check #(
  parameter int H       = 28,
  parameter int K       = 5,
  parameter int ORDER   = 1,
  parameter int NFRAMES = 3
) (
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int NC = ORDER + 1;
  localparam int OR = H - K + 1;
  localparam int WMAX = H + 4;

  logic clk = 1'b0;
  logic rst_n;
  logic coef_load, col_valid, col_first;
  logic signed [7:0]  coef_in [K][NC];
  logic signed [7:0]  col_in  [H];
  logic               out_valid;
  logic [15:0]        out_idx;
  logic signed [31:0] out_col [OR];

  conv_engine #(.H(H), .K(K), .ORDER(ORDER)) u_dut (
    .clk(clk), .rst_n(rst_n), .coef_load(coef_load), .coef_in(coef_in),
    .col_valid(col_valid), .col_first(col_first), .col_in(col_in),
    .out_valid(out_valid), .out_idx(out_idx), .out_col(out_col));

  always #5 clk = ~clk;

  int img  [H][WMAX];
  int coef [K][NC];
  int outputs_seen;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL H=%0d K=%0d ORDER=%0d %s: got %0d expected %0d",
               H, K, ORDER, what, got, exp);
    end
  endtask

  function automatic longint ref_out(int j, int c);
    longint s = 0;
    for (int i = 0; i < K; i++)
      for (int x = 0; x < K; x++) begin
        longint w = 0;
        for (int k = 0; k < NC; k++) w += longint'(coef[i][k]) * longint'(x) ** k;
        s += w * longint'(img[i+j][c+x]);
      end
    return s;
  endfunction

  // Expected output for the clock after next: valid flag and column index.
  logic exp_v1, exp_v2;
  int   exp_i1, exp_i2;

  // Called at a falling edge: checks what the last rising edge produced.
  task automatic check_outputs();
    check("out_valid timing", longint'(out_valid), longint'(exp_v2));
    if (out_valid && exp_v2) begin
      outputs_seen++;
      check("out_idx", longint'(out_idx), longint'(exp_i2));
      for (int j = 0; j < OR; j++)
        check($sformatf("out row %0d col %0d", j, exp_i2), longint'(out_col[j]),
              ref_out(j, exp_i2));
    end
    exp_v2 = exp_v1;
    exp_i2 = exp_i1;
    exp_v1 = 1'b0;
  endtask

  task automatic randomize_coef_in();
    for (int i = 0; i < K; i++)
      for (int k = 0; k < NC; k++) coef_in[i][k] = 8'($urandom);
  endtask

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
    outputs_seen = 0;
    exp_v1 = 1'b0;
    exp_v2 = 1'b0;
    exp_i1 = 0;
    exp_i2 = 0;
    rst_n = 1'b0;
    coef_load = 1'b0;
    col_valid = 1'b0;
    col_first = 1'b0;
    randomize_coef_in();
    for (int r = 0; r < H; r++) col_in[r] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int f = 0; f < NFRAMES; f++) begin
      // Frame widths: full, minimal (one output column), wider than tall.
      int w;
      w = (f % 3 == 0) ? H : (f % 3 == 1) ? K : WMAX;
      // Load a new filter.
      @(negedge clk);
      check_outputs();
      for (int i = 0; i < K; i++)
        for (int k = 0; k < NC; k++) begin
          coef[i][k] = (f == 0 && i == 0) ? -128 : int'($signed(8'($urandom)));
          coef_in[i][k] = 8'(coef[i][k]);
        end
      coef_load = 1'b1;
      @(negedge clk);
      check_outputs();
      coef_load = 1'b0;
      randomize_coef_in();
      // The previous frame's last output has been checked by now.
      for (int r = 0; r < H; r++)
        for (int c = 0; c < WMAX; c++)
          img[r][c] = (f == 0 && r == 0) ? -128 : int'($signed(8'($urandom)));
      // Stream the columns.
      for (int c = 0; c < w; c++) begin
        col_valid = 1'b1;
        col_first = (c == 0);
        for (int r = 0; r < H; r++) col_in[r] = 8'(img[r][c]);
        if (c >= K - 1) begin
          exp_v1 = 1'b1;
          exp_i1 = c - K + 1;
        end
        @(negedge clk);
        check_outputs();
        col_valid = 1'b0;
        col_first = 1'b0;
        randomize_coef_in();
        if (f % 2 == 1) begin
          repeat ($urandom_range(0, 2)) begin
            for (int r = 0; r < H; r++) col_in[r] = 8'($urandom);
            @(negedge clk);
            check_outputs();
          end
        end
      end
    end
    repeat (3) begin
      @(negedge clk);
      check_outputs();
    end
    // Every complete window must have produced one output column.
    begin
      int expected_outputs;
      expected_outputs = 0;
      for (int f = 0; f < NFRAMES; f++)
        expected_outputs += ((f % 3 == 0) ? H : (f % 3 == 1) ? K : WMAX) - K + 1;
      check("number of output columns", longint'(outputs_seen), longint'(expected_outputs));
    end
    done = 1'b1;
  end

endmodule
