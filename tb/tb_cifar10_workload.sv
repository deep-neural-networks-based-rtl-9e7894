// tb_cifar10_workload: the layer shapes of the CIFAR-10 network run through
// the datapath, as far as is practical in simulation.
//
// The datapath is built with H = 36 (a 32x32 map plus two rows of zero
// padding on each side, for the network's 'same' 5x5 convolutions), a store
// of 96 filters (the 3 x 32 filters of the first layer) and an FC engine of
// 2048 inputs and 128 outputs with 8-weight groups in two sub-blocks of 4
// (the first FC layer with N_w = 8).
// The test runs two output maps of the first convolution layer, each the sum
// of three per-channel passes over a zero-padded random 32x32x3 image
// (32 x 32 outputs per pass), and one 2048-input vector through the FC
// layer. Every output is compared with a reference computed here from the
// expanded weights w = c0 + c1*x. The second convolution and FC layers
// differ only in channel counts and sizes and are not run.
module tb_cifar10_workload;

  localparam int H = 36, K = 5, NC = 2, N_FILT = 96;
  localparam int FC_IN = 2048, FC_OUT = 128, FC_NW = 8, NGRP = FC_IN / FC_NW;
  localparam int OR = H - K + 1;
  localparam int CW_W = K * NC * 8, FW_W = FC_OUT * NC * 8;

  logic clk = 1'b0;
  logic rst_n;
  logic ccoef_we, fcoef_we, filt_load;
  logic [6:0] ccoef_waddr, filt_idx;
  logic [CW_W-1:0] ccoef_wdata;
  logic [7:0] fcoef_waddr;
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
  logic [6:0] class_idx;

  dnn_reuse_top #(.H(H), .K(K), .N_FILT(N_FILT), .FC_IN(FC_IN), .FC_OUT(FC_OUT),
                  .FC_NW(FC_NW), .FC_SUB(4)) u_dut (
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
  int img  [3][H][H];          // zero-padded 32x32x3 image

  int checks = 0, failures = 0;
  int passes = 0, fc_results = 0, classes = 0;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  longint cap [OR][OR];
  int     cap_cols;
  always @(negedge clk) begin
    if (conv_out_valid) begin
      for (int j = 0; j < OR; j++) cap[j][int'(conv_out_idx)] = longint'(conv_out_col[j]);
      cap_cols++;
    end
  end

  longint fc_cap [FC_OUT];
  always @(negedge clk) begin
    if (fc_out_valid) begin
      for (int n = 0; n < FC_OUT; n++) fc_cap[n] = longint'(fc_out[n]);
      fc_results++;
    end
    if (class_valid) classes++;
  end

  task automatic conv_pass(int f, int ch, output longint res [OR][OR]);
    @(negedge clk);
    filt_load = 1'b1;
    filt_idx = 7'(f);
    @(negedge clk);
    filt_load = 1'b0;
    @(negedge clk);
    cap_cols = 0;
    for (int c = 0; c < H; c++) begin
      conv_col_valid = 1'b1;
      conv_col_first = (c == 0);
      for (int r = 0; r < H; r++) conv_col[r] = 8'(img[ch][r][c]);
      @(negedge clk);
    end
    conv_col_valid = 1'b0;
    conv_col_first = 1'b0;
    repeat (2) @(negedge clk);
    passes++;
    check("32 output columns per pass", longint'(cap_cols), longint'(OR));
    for (int j = 0; j < OR; j++)
      for (int c = 0; c < OR; c++) begin
        longint s;
        s = 0;
        for (int i = 0; i < K; i++)
          for (int x = 0; x < K; x++)
            s += (longint'(cmem[f][i][0]) + longint'(x) * cmem[f][i][1])
                 * longint'(img[ch][i+j][c+x]);
        res[j][c] = s;
        check($sformatf("filter %0d out (%0d,%0d)", f, j, c), cap[j][c], s);
      end
  endtask

  longint res [OR][OR];

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
    for (int ch = 0; ch < 3; ch++)
      for (int r = 0; r < H; r++)
        for (int c = 0; c < H; c++)
          img[ch][r][c] = (r >= 2 && r < 34 && c >= 2 && c < 34) ? int'($signed(8'($urandom))) : 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // Filter 3*o + ch: output map o, input channel ch.
    for (int f = 0; f < N_FILT; f++) begin
      ccoef_we = 1'b1;
      ccoef_waddr = 7'(f);
      for (int i = 0; i < K; i++)
        for (int k = 0; k < NC; k++) begin
          cmem[f][i][k] = int'($signed(8'($urandom)));
          ccoef_wdata[(i*NC + k)*8 +: 8] = 8'(cmem[f][i][k]);
        end
      @(negedge clk);
    end
    ccoef_we = 1'b0;
    for (int g = 0; g < NGRP; g++) begin
      fcoef_we = 1'b1;
      fcoef_waddr = 8'(g);
      for (int n = 0; n < FC_OUT; n++)
        for (int k = 0; k < NC; k++) begin
          fmem[g][n][k] = int'($signed(8'($urandom)));
          fcoef_wdata[(n*NC + k)*8 +: 8] = 8'(fmem[g][n][k]);
        end
      @(negedge clk);
    end
    fcoef_we = 1'b0;
    // Two output maps of the first layer (the last one in the store too).
    for (int oi = 0; oi < 2; oi++) begin
      int o;
      o = (oi == 0) ? 0 : 31;
      for (int ch = 0; ch < 3; ch++) begin
        conv_pass(3*o + ch, ch, res);
      end
    end
    // One vector through the first FC layer.
    begin
      int y [FC_IN];
      longint e [FC_OUT];
      for (int i = 0; i < FC_IN; i++) y[i] = int'($signed(8'($urandom)));
      for (int n = 0; n < FC_OUT; n++) begin
        e[n] = 0;
        for (int g = 0; g < NGRP; g++)
          for (int x = 0; x < FC_NW; x++)
            e[n] += (longint'(fmem[g][n][0]) + longint'(x) * fmem[g][n][1])
                    * longint'(y[g*FC_NW + x]);
      end
      for (int g = 0; g < NGRP; g++) begin
        fc_valid = 1'b1;
        for (int i = 0; i < FC_NW; i++) fc_y[i] = 8'(y[g*FC_NW + i]);
        @(negedge clk);
      end
      fc_valid = 1'b0;
      repeat (4) @(negedge clk);
      check("FC results", longint'(fc_results), 1);
      for (int n = 0; n < FC_OUT; n++)
        check($sformatf("FC neuron %0d", n), fc_cap[n], e[n]);
    end
    check("convolution passes", longint'(passes), 6);
    check("classifications", longint'(classes), 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
