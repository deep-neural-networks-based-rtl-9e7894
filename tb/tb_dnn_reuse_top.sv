// tb_dnn_reuse_top: end-to-end test of the inference datapath at its default
// size (28x28 ifmaps, 5x5 linear filters, 78 stored filters, FC 192 -> 10 in
// groups of 6).
//
// Sequence: fill both coefficient stores with random coefficients; then, at
// the same time,
//   * convolve four random 28x28 ifmaps, each with a different stored filter
//     (filter switches, including the first and the last store word), two of
//     them with idle clocks between columns;
//   * push five random 192-input vectors through the FC engine, back to back
//     and with gaps, and check the outputs and the classification.
// References are computed here from the stored coefficients, expanding every
// weight as w = c0 + c1*x. Timing checked: FC outputs two clocks after the
// last group is presented, the class one clock later; convolution output
// columns in order, 24 per ifmap.
// Each mechanism is counted and must occur at least once: coefficient writes,
// filter loads, column gaps, back-to-back FC groups, FC gaps, overlap of the
// two engines, FC results, classifications.
module tb_dnn_reuse_top;

  localparam int H = 28, K = 5, NC = 2, N_FILT = 78;
  localparam int FC_IN = 192, FC_OUT = 10, FC_NW = 6, NGRP = FC_IN / FC_NW;
  localparam int OR = H - K + 1;
  localparam int CW_W = K * NC * 8, FW_W = FC_OUT * NC * 8;

  logic clk = 1'b0;
  logic rst_n;
  logic ccoef_we, fcoef_we, filt_load;
  logic [6:0] ccoef_waddr, filt_idx;
  logic [CW_W-1:0] ccoef_wdata;
  logic [4:0] fcoef_waddr;
  logic [FW_W-1:0] fcoef_wdata;
  logic conv_col_valid, conv_col_first;
  logic signed [7:0] conv_col [H];
  logic conv_out_valid;
  logic [15:0] conv_out_idx;
  logic signed [31:0] conv_out_col [OR];
  logic fc_valid;
  logic signed [7:0] fc_y [FC_NW];
  logic fc_out_valid;
  logic signed [31:0] fc_out [FC_OUT];
  logic class_valid;
  logic [3:0] class_idx;

  dnn_reuse_top u_dut (
    .clk(clk), .rst_n(rst_n),
    .ccoef_we(ccoef_we), .ccoef_waddr(ccoef_waddr), .ccoef_wdata(ccoef_wdata),
    .fcoef_we(fcoef_we), .fcoef_waddr(fcoef_waddr), .fcoef_wdata(fcoef_wdata),
    .filt_load(filt_load), .filt_idx(filt_idx),
    .conv_col_valid(conv_col_valid), .conv_col_first(conv_col_first), .conv_col(conv_col),
    .conv_out_valid(conv_out_valid), .conv_out_idx(conv_out_idx), .conv_out_col(conv_out_col),
    .fc_valid(fc_valid), .fc_y(fc_y), .fc_out_valid(fc_out_valid), .fc_out(fc_out),
    .class_valid(class_valid), .class_idx(class_idx));

  always #5 clk = ~clk;

  // Models of the coefficient stores.
  int cmem [N_FILT][K][NC];
  int fmem [NGRP][FC_OUT][NC];

  int checks = 0, failures = 0;
  int cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // Mechanism counters.
  int n_coef_writes = 0, n_filter_loads = 0, n_col_gaps = 0, n_conv_cols = 0;
  int n_fc_b2b = 0, n_fc_gaps = 0, n_overlap = 0, n_fc_results = 0, n_classes = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // ---------------- convolution reference and monitor ----------------
  int cur_img [H][H];
  int cur_filt;
  int next_conv_idx;
  logic conv_busy = 1'b0, fc_busy = 1'b0;

  function automatic longint conv_ref(int j, int c);
    longint s = 0;
    for (int i = 0; i < K; i++)
      for (int x = 0; x < K; x++)
        s += (longint'(cmem[cur_filt][i][0]) + longint'(x) * cmem[cur_filt][i][1])
             * longint'(cur_img[i+j][c+x]);
    return s;
  endfunction

  always @(negedge clk) begin
    if (conv_out_valid) begin
      n_conv_cols++;
      check("conv column order", longint'(conv_out_idx), longint'(next_conv_idx));
      for (int j = 0; j < OR; j++)
        check($sformatf("filter %0d out (%0d,%0d)", cur_filt, j, conv_out_idx),
              longint'(conv_out_col[j]), conv_ref(j, int'(conv_out_idx)));
      next_conv_idx++;
    end
    if (conv_busy && fc_busy) n_overlap++;
  end

  // ---------------- FC reference and monitor ----------------
  // Expected FC results, in order: written by the driver, read by the
  // monitors.
  longint exp_fc    [8][FC_OUT];
  int     exp_cls   [8];
  int     exp_cycle [8];   // cycle at which fc_out_valid is due
  int     exp_wr = 0, fc_rd = 0, cls_rd = 0;

  always @(negedge clk) begin
    if (fc_out_valid) begin
      n_fc_results++;
      if (fc_rd >= exp_wr) begin
        check("unexpected fc_out_valid", 1, 0);
      end else begin
        check("FC result latency", longint'(cycle), longint'(exp_cycle[fc_rd]));
        for (int n = 0; n < FC_OUT; n++)
          check($sformatf("FC neuron %0d", n), longint'(fc_out[n]), exp_fc[fc_rd][n]);
        fc_rd++;
      end
    end
    if (class_valid) begin
      n_classes++;
      if (cls_rd >= exp_wr) begin
        check("unexpected class_valid", 1, 0);
      end else begin
        check("class", longint'(class_idx), longint'(exp_cls[cls_rd]));
        check("class latency", longint'(cycle), longint'(exp_cycle[cls_rd]) + 1);
        cls_rd++;
      end
    end
  end

  // ---------------- drivers ----------------
  task automatic run_conv(int filt, bit gaps);
    @(negedge clk);
    filt_load = 1'b1;
    filt_idx = 7'(filt);
    n_filter_loads++;
    @(negedge clk);
    filt_load = 1'b0;
    filt_idx = 7'($urandom);
    @(negedge clk);   // coefficients enter the engine at this edge
    conv_busy = 1'b1;
    cur_filt = filt;
    next_conv_idx = 0;
    for (int r = 0; r < H; r++)
      for (int c = 0; c < H; c++) cur_img[r][c] = int'($signed(8'($urandom)));
    for (int c = 0; c < H; c++) begin
      conv_col_valid = 1'b1;
      conv_col_first = (c == 0);
      for (int r = 0; r < H; r++) conv_col[r] = 8'(cur_img[r][c]);
      @(negedge clk);
      conv_col_valid = 1'b0;
      conv_col_first = 1'b0;
      for (int r = 0; r < H; r++) conv_col[r] = 8'($urandom);
      if (gaps && (c % 3 == 1)) begin
        n_col_gaps++;
        repeat ($urandom_range(1, 3)) @(negedge clk);
      end
    end
    repeat (3) @(negedge clk);
    check("24 output columns per ifmap", longint'(next_conv_idx), longint'(OR));
    conv_busy = 1'b0;
  endtask

  task automatic run_fc(bit gaps);
    int y [FC_IN];
    longint e [FC_OUT];
    int best;
    fc_busy = 1'b1;
    for (int i = 0; i < FC_IN; i++) y[i] = int'($signed(8'($urandom)));
    for (int n = 0; n < FC_OUT; n++) begin
      e[n] = 0;
      for (int g = 0; g < NGRP; g++)
        for (int x = 0; x < FC_NW; x++)
          e[n] += (longint'(fmem[g][n][0]) + longint'(x) * fmem[g][n][1])
                  * longint'(y[g*FC_NW + x]);
    end
    best = 0;
    for (int n = 1; n < FC_OUT; n++) if (e[n] > e[best]) best = n;
    for (int g = 0; g < NGRP; g++) begin
      fc_valid = 1'b1;
      for (int i = 0; i < FC_NW; i++) fc_y[i] = 8'(y[g*FC_NW + i]);
      if (g == NGRP - 1) begin
        exp_fc[exp_wr] = e;
        exp_cls[exp_wr] = best;
        // Presented now; results are due two clocks later.
        exp_cycle[exp_wr] = cycle + 2;
        exp_wr++;
      end
      @(negedge clk);
      fc_valid = 1'b0;
      for (int i = 0; i < FC_NW; i++) fc_y[i] = 8'($urandom);
      if (gaps && (g % 4 == 2)) begin
        n_fc_gaps++;
        repeat ($urandom_range(1, 2)) @(negedge clk);
      end else if (g != NGRP - 1) begin
        n_fc_b2b++;
      end
    end
    fc_busy = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0;
    ccoef_we = 1'b0;
    fcoef_we = 1'b0;
    filt_load = 1'b0;
    filt_idx = '0;
    ccoef_waddr = '0;
    ccoef_wdata = '0;
    fcoef_waddr = '0;
    fcoef_wdata = '0;
    conv_col_valid = 1'b0;
    conv_col_first = 1'b0;
    fc_valid = 1'b0;
    for (int r = 0; r < H; r++) conv_col[r] = '0;
    for (int i = 0; i < FC_NW; i++) fc_y[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Fill the coefficient stores.
    for (int f = 0; f < N_FILT; f++) begin
      ccoef_we = 1'b1;
      ccoef_waddr = 7'(f);
      for (int i = 0; i < K; i++)
        for (int k = 0; k < NC; k++) begin
          cmem[f][i][k] = int'($signed(8'($urandom)));
          ccoef_wdata[(i*NC + k)*8 +: 8] = 8'(cmem[f][i][k]);
        end
      n_coef_writes++;
      @(negedge clk);
    end
    ccoef_we = 1'b0;
    for (int g = 0; g < NGRP; g++) begin
      fcoef_we = 1'b1;
      fcoef_waddr = 5'(g);
      for (int n = 0; n < FC_OUT; n++)
        for (int k = 0; k < NC; k++) begin
          fmem[g][n][k] = int'($signed(8'($urandom)));
          fcoef_wdata[(n*NC + k)*8 +: 8] = 8'(fmem[g][n][k]);
        end
      n_coef_writes++;
      @(negedge clk);
    end
    fcoef_we = 1'b0;
    // Both engines at once.
    fork
      begin
        run_conv(0, 1'b0);
        run_conv(N_FILT - 1, 1'b1);
        run_conv(40, 1'b0);
        run_conv(13, 1'b1);
      end
      begin
        run_fc(1'b0);
        run_fc(1'b0);
        run_fc(1'b1);
        run_fc(1'b0);
        run_fc(1'b1);
      end
    join
    repeat (5) @(negedge clk);
    check("all FC results arrived", longint'(fc_rd), longint'(exp_wr));
    check("all classes arrived", longint'(cls_rd), longint'(exp_wr));
    check("FC results", longint'(n_fc_results), 5);
    check("classifications", longint'(n_classes), 5);
    check("conv output columns", longint'(n_conv_cols), 4 * OR);
    $display("mechanisms: coef_writes=%0d filter_loads=%0d col_gaps=%0d conv_cols=%0d fc_b2b=%0d fc_gaps=%0d overlap=%0d fc_results=%0d classes=%0d",
             n_coef_writes, n_filter_loads, n_col_gaps, n_conv_cols, n_fc_b2b,
             n_fc_gaps, n_overlap, n_fc_results, n_classes);
    check("mechanism: coefficient writes", longint'(n_coef_writes > 0), 1);
    check("mechanism: filter switches", longint'(n_filter_loads > 1), 1);
    check("mechanism: column gaps", longint'(n_col_gaps > 0), 1);
    check("mechanism: back-to-back FC groups", longint'(n_fc_b2b > 0), 1);
    check("mechanism: FC gaps", longint'(n_fc_gaps > 0), 1);
    check("mechanism: engines overlapping", longint'(n_overlap > 0), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
