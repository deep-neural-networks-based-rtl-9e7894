// lenet5_check: runs complete LeNet-5 (MNIST) inferences through one
// dnn_reuse_top and checks every intermediate result.
//
// Network (28x28 input): conv1 6 filters 5x5 -> 24x24x6 -> activation ->
// 2x2 average pool -> 12x12x6 -> conv2 6x12 filters 5x5 -> 8x8x12 ->
// activation -> pool -> 4x4x12 = 192 -> FC 192 -> 10 -> class.
// The datapath does the convolutions (one filter on one channel per pass),
// the FC layer and the arg-max. This harness plays the parts outside it:
// summing conv2 over its 6 input channels, the activation, the pooling and
// the ordering of the 192 FC inputs. As activation it uses a ReLU followed by
// a right shift and saturation to 0..127, a stand-in that keeps the data in 8
// bits (the trained networks use sigmoid). conv2's 12x12 maps occupy rows
// 0..11 of the 28-row engine; the other rows are fed zeros and output rows
// 0..7 are used.
// Coefficients and images are random. Every convolution pass, the FC outputs
// and the class are compared with references computed here from the
// expanded weights w = c0 + c1*x.
module lenet5_check #(
  parameter int FC_NW  = 6,
  parameter int FC_SUB = 3,
  parameter int NIMG   = 2
) (
  output logic done,
  output int   checks,
  output int   failures,
  output int   conv_passes,
  output int   classes
);

  localparam int H = 28, K = 5, NC = 2, N_FILT = 78;
  localparam int FC_IN = 192, FC_OUT = 10, NGRP = FC_IN / FC_NW;
  localparam int OR = H - K + 1;
  localparam int CW_W = K * NC * 8, FW_W = FC_OUT * NC * 8;
  localparam int FA_W = (NGRP > 1) ? $clog2(NGRP) : 1;

  logic clk = 1'b0;
  logic rst_n;
  logic ccoef_we, fcoef_we, filt_load;
  logic [6:0] ccoef_waddr, filt_idx;
  logic [CW_W-1:0] ccoef_wdata;
  logic [FA_W-1:0] fcoef_waddr;
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

  dnn_reuse_top #(.FC_NW(FC_NW), .FC_SUB(FC_SUB)) u_dut (
    .clk(clk), .rst_n(rst_n),
    .ccoef_we(ccoef_we), .ccoef_waddr(ccoef_waddr), .ccoef_wdata(ccoef_wdata),
    .fcoef_we(fcoef_we), .fcoef_waddr(fcoef_waddr), .fcoef_wdata(fcoef_wdata),
    .filt_load(filt_load), .filt_idx(filt_idx),
    .conv_col_valid(conv_col_valid), .conv_col_first(conv_col_first), .conv_col(conv_col),
    .conv_out_valid(conv_out_valid), .conv_out_idx(conv_out_idx), .conv_out_col(conv_out_col),
    .fc_valid(fc_valid), .fc_y(fc_y), .fc_out_valid(fc_out_valid), .fc_out(fc_out),
    .class_valid(class_valid), .class_idx(class_idx));

  always #5 clk = ~clk;

  int cmem [N_FILT][K][NC];
  int fmem [NGRP][FC_OUT][NC];

  // Captured convolution output of the current pass.
  longint cap [OR][OR];
  int     cap_cols;
  always @(negedge clk) begin
    if (conv_out_valid) begin
      for (int j = 0; j < OR; j++) cap[j][int'(conv_out_idx)] = longint'(conv_out_col[j]);
      cap_cols++;
    end
  end

  // Captured FC result.
  longint fc_cap [FC_OUT];
  int     fc_seen, cls_seen, cls_cap;
  always @(negedge clk) begin
    if (fc_out_valid) begin
      for (int n = 0; n < FC_OUT; n++) fc_cap[n] = longint'(fc_out[n]);
      fc_seen++;
    end
    if (class_valid) begin
      cls_cap = int'(class_idx);
      cls_seen++;
    end
  end

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL LeNet-5 FC_NW=%0d %s: got %0d expected %0d", FC_NW, what, got, exp);
    end
  endtask

  // Activation stand-in: ReLU, scale down by 2^sh, saturate to 127.
  function automatic int act(longint s, int sh);
    longint v;
    v = (s < 0) ? 0 : (s >>> sh);
    return (v > 127) ? 127 : int'(v);
  endfunction

  // ifmap for one pass, rows beyond the map are zero.
  int fin [H][H];

  // One convolution pass: filter f over fin (w columns); checks output rows
  // 0..rows-1 against the reference and returns them in res.
  task automatic conv_pass(int f, int w, int rows, output longint res [OR][OR]);
    @(negedge clk);
    filt_load = 1'b1;
    filt_idx = 7'(f);
    @(negedge clk);
    filt_load = 1'b0;
    @(negedge clk);
    cap_cols = 0;
    for (int c = 0; c < w; c++) begin
      conv_col_valid = 1'b1;
      conv_col_first = (c == 0);
      for (int r = 0; r < H; r++) conv_col[r] = 8'(fin[r][c]);
      @(negedge clk);
    end
    conv_col_valid = 1'b0;
    conv_col_first = 1'b0;
    repeat (2) @(negedge clk);
    conv_passes++;
    check($sformatf("filter %0d output columns", f), longint'(cap_cols), longint'(w) - longint'(K) + 1);
    for (int j = 0; j < rows; j++)
      for (int c = 0; c <= w - K; c++) begin
        longint s;
        s = 0;
        for (int i = 0; i < K; i++)
          for (int x = 0; x < K; x++)
            s += (longint'(cmem[f][i][0]) + longint'(x) * cmem[f][i][1])
                 * longint'(fin[i+j][c+x]);
        res[j][c] = s;
        check($sformatf("filter %0d out (%0d,%0d)", f, j, c), cap[j][c], s);
      end
  endtask

  int     img  [28][28];
  int     p1   [6][12][12];
  longint s2   [12][8][8];
  int     vec  [FC_IN];
  longint res  [OR][OR];

  initial begin
    done = 1'b0;
    checks = 0;
    failures = 0;
    conv_passes = 0;
    classes = 0;
    fc_seen = 0;
    cls_seen = 0;
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
    // Coefficient stores: filters 0..5 are conv1, 6 + 6*o + ci is conv2
    // output map o, input channel ci.
    for (int f = 0; f < N_FILT; f++) begin
      ccoef_we = 1'b1;
      ccoef_waddr = 7'(f);
      for (int i = 0; i < K; i++)
        for (int k = 0; k < NC; k++) begin
          cmem[f][i][k] = $urandom_range(0, 63) - 32;
          ccoef_wdata[(i*NC + k)*8 +: 8] = 8'(cmem[f][i][k]);
        end
      @(negedge clk);
    end
    ccoef_we = 1'b0;
    for (int g = 0; g < NGRP; g++) begin
      fcoef_we = 1'b1;
      fcoef_waddr = FA_W'(g);
      for (int n = 0; n < FC_OUT; n++)
        for (int k = 0; k < NC; k++) begin
          fmem[g][n][k] = int'($signed(8'($urandom)));
          fcoef_wdata[(n*NC + k)*8 +: 8] = 8'(fmem[g][n][k]);
        end
      @(negedge clk);
    end
    fcoef_we = 1'b0;

    for (int im = 0; im < NIMG; im++) begin
      for (int r = 0; r < 28; r++)
        for (int c = 0; c < 28; c++) img[r][c] = $urandom_range(0, 127);
      // conv1 + activation + pooling
      for (int f = 0; f < 6; f++) begin
        fin = img;
        conv_pass(f, 28, OR, res);
        for (int r = 0; r < 12; r++)
          for (int c = 0; c < 12; c++)
            p1[f][r][c] = (act(res[2*r][2*c], 8) + act(res[2*r][2*c+1], 8)
                         + act(res[2*r+1][2*c], 8) + act(res[2*r+1][2*c+1], 8)) / 4;
      end
      // conv2: one pass per (output map, input channel), summed here
      for (int o = 0; o < 12; o++) begin
        for (int r = 0; r < 8; r++)
          for (int c = 0; c < 8; c++) s2[o][r][c] = 0;
        for (int ci = 0; ci < 6; ci++) begin
          for (int r = 0; r < H; r++)
            for (int c = 0; c < H; c++) fin[r][c] = (r < 12 && c < 12) ? p1[ci][r][c] : 0;
          conv_pass(6 + 6*o + ci, 12, 8, res);
          for (int r = 0; r < 8; r++)
            for (int c = 0; c < 8; c++) s2[o][r][c] += res[r][c];
        end
        for (int r = 0; r < 4; r++)
          for (int c = 0; c < 4; c++)
            vec[o*16 + r*4 + c] = (act(s2[o][2*r][2*c], 9) + act(s2[o][2*r][2*c+1], 9)
                                 + act(s2[o][2*r+1][2*c], 9) + act(s2[o][2*r+1][2*c+1], 9)) / 4;
      end
      // FC + classification
      begin
        longint e [FC_OUT];
        int best, fc_before, cls_before;
        fc_before = fc_seen;
        cls_before = cls_seen;
        for (int n = 0; n < FC_OUT; n++) begin
          e[n] = 0;
          for (int g = 0; g < NGRP; g++)
            for (int x = 0; x < FC_NW; x++)
              e[n] += (longint'(fmem[g][n][0]) + longint'(x) * fmem[g][n][1])
                      * longint'(vec[g*FC_NW + x]);
        end
        best = 0;
        for (int n = 1; n < FC_OUT; n++) if (e[n] > e[best]) best = n;
        for (int g = 0; g < NGRP; g++) begin
          fc_valid = 1'b1;
          for (int i = 0; i < FC_NW; i++) fc_y[i] = 8'(vec[g*FC_NW + i]);
          @(negedge clk);
        end
        fc_valid = 1'b0;
        repeat (4) @(negedge clk);
        check("FC result count", longint'(fc_seen) - longint'(fc_before), 1);
        check("class count", longint'(cls_seen) - longint'(cls_before), 1);
        for (int n = 0; n < FC_OUT; n++)
          check($sformatf("image %0d FC neuron %0d", im, n), fc_cap[n], e[n]);
        check($sformatf("image %0d class", im), longint'(cls_cap), longint'(best));
        classes++;
      end
    end
    done = 1'b1;
  end

endmodule
