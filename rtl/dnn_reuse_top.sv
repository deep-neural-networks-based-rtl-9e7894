// dnn_reuse_top: inference datapath for networks whose weights were replaced,
// during training, by linear (or quadratic) fits over groups of weights.
//
// Because every weight of a group is c0 + c1*x, a dot product over the group
// needs only the data sums d0 = sum y and d1 = sum x*y, which are computed
// once per data row and shared by all processing elements that read it. The
// top holds:
//   * a convolution engine (K filter rows by H-K+1 output rows of PEs) with
//     a coefficient store of N_FILT filters, one word per filter;
//   * a fully connected engine (FC_NW/FC_SUB sub-blocks by FC_OUT neurons of
//     PEs) with a coefficient store of FC_IN/FC_NW words, one per weight
//     group, each word carrying the coefficients of all FC_OUT neurons;
//   * an arg-max classifier on the FC outputs.
// Activation and pooling between layers are not part of this datapath: the
// convolution output column stream and the FC input stream are ports.
//
// Coefficient word layouts (COEF_W-bit signed fields, NC = ORDER+1):
//   convolution word: field (r*NC + k) = coefficient k of filter row r
//   FC word:          field (n*NC + k) = coefficient k of neuron n
//
// Timing:
//   * filt_load with filt_idx reads filter filt_idx; its coefficients enter
//     the convolution engine two clocks later (synchronous read, then load).
//     Columns presented from then on use the new filter.
//   * conv: see conv_engine (one output column per clock, one clock after the
//     column that completes it).
//   * FC: present the FC_IN/FC_NW groups of an input vector in order on fc_y
//     with fc_valid, back to back or with gaps. Each group is delayed one
//     clock inside, to meet its coefficients from the store. fc_out_valid
//     follows the last group by two clocks, class_valid by three.
// rst_n is asynchronous and active low. Default sizes are the LeNet-5 MNIST
// network: 28x28 input, 5x5 filters, 78 filters, FC 192 -> 10 with groups of
// 6 weights, 8-bit coefficients.
module dnn_reuse_top #(
  parameter int unsigned H      = 28,
  parameter int unsigned K      = 5,
  parameter int unsigned ORDER  = 1,
  parameter int unsigned N_FILT = 78,
  parameter int unsigned FC_IN  = 192,
  parameter int unsigned FC_OUT = 10,
  parameter int unsigned FC_NW  = 6,
  parameter int unsigned FC_SUB = 3,
  parameter int unsigned DATA_W = dnn_pkg::DATA_W,
  parameter int unsigned COEF_W = dnn_pkg::COEF_W,
  parameter int unsigned ACC_W  = dnn_pkg::ACC_W,
  localparam int unsigned NC       = ORDER + 1,
  localparam int unsigned CW_W     = K * NC * COEF_W,
  localparam int unsigned FW_W     = FC_OUT * NC * COEF_W,
  localparam int unsigned NGRP     = FC_IN / FC_NW,
  localparam int unsigned CA_W     = (N_FILT > 1) ? $clog2(N_FILT) : 1,
  localparam int unsigned FA_W     = (NGRP > 1) ? $clog2(NGRP) : 1,
  localparam int unsigned CLS_W    = (FC_OUT > 1) ? $clog2(FC_OUT) : 1,
  localparam int unsigned OUT_ROWS = H - K + 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // convolution coefficient store, write port
  input  logic                     ccoef_we,
  input  logic [CA_W-1:0]          ccoef_waddr,
  input  logic [CW_W-1:0]          ccoef_wdata,
  // FC coefficient store, write port
  input  logic                     fcoef_we,
  input  logic [FA_W-1:0]          fcoef_waddr,
  input  logic [FW_W-1:0]          fcoef_wdata,
  // filter selection
  input  logic                     filt_load,
  input  logic [CA_W-1:0]          filt_idx,
  // convolution stream
  input  logic                     conv_col_valid,
  input  logic                     conv_col_first,
  input  logic signed [DATA_W-1:0] conv_col       [H],
  output logic                     conv_out_valid,
  output logic [15:0]              conv_out_idx,
  output logic signed [ACC_W-1:0]  conv_out_col   [OUT_ROWS],
  // fully connected stream
  input  logic                     fc_valid,
  input  logic signed [DATA_W-1:0] fc_y           [FC_NW],
  output logic                     fc_out_valid,
  output logic signed [ACC_W-1:0]  fc_out         [FC_OUT],
  // classification
  output logic                     class_valid,
  output logic [CLS_W-1:0]         class_idx
);

  // ---------------- convolution side ----------------
  logic [CW_W-1:0]          ccoef_rdata;
  logic                     filt_load_d;
  logic signed [COEF_W-1:0] conv_coef [K][NC];

  coef_mem #(
    .WIDTH(CW_W),
    .DEPTH(N_FILT)
  ) u_conv_coef_mem (
    .clk  (clk),
    .we   (ccoef_we),
    .waddr(ccoef_waddr),
    .wdata(ccoef_wdata),
    .raddr(filt_idx),
    .rdata(ccoef_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) filt_load_d <= 1'b0;
    else        filt_load_d <= filt_load;
  end

  always_comb begin
    for (int r = 0; r < K; r++)
      for (int k = 0; k < NC; k++)
        conv_coef[r][k] = signed'(ccoef_rdata[(r*NC + k)*COEF_W +: COEF_W]);
  end

  conv_engine #(
    .H     (H),
    .K     (K),
    .ORDER (ORDER),
    .DATA_W(DATA_W),
    .COEF_W(COEF_W),
    .ACC_W (ACC_W)
  ) u_conv (
    .clk      (clk),
    .rst_n    (rst_n),
    .coef_load(filt_load_d),
    .coef_in  (conv_coef),
    .col_valid(conv_col_valid),
    .col_first(conv_col_first),
    .col_in   (conv_col),
    .out_valid(conv_out_valid),
    .out_idx  (conv_out_idx),
    .out_col  (conv_out_col)
  );

  // ---------------- fully connected side ----------------
  logic [FW_W-1:0]          fcoef_rdata;
  logic [FA_W-1:0]          grp_idx;
  logic [FA_W-1:0]          fcoef_raddr;
  logic                     fc_valid_d;
  logic signed [DATA_W-1:0] fc_y_d    [FC_NW];
  logic signed [COEF_W-1:0] fc_coef   [FC_OUT][NC];

  // The engine's grp_idx is the group it expects next. While it is taking a
  // group, the group after that is read, so back-to-back groups meet their
  // coefficients one clock after they arrive.
  always_comb begin
    if (fc_valid_d)
      fcoef_raddr = (grp_idx == FA_W'(NGRP - 1)) ? '0 : grp_idx + 1'b1;
    else
      fcoef_raddr = grp_idx;
  end

  coef_mem #(
    .WIDTH(FW_W),
    .DEPTH(NGRP)
  ) u_fc_coef_mem (
    .clk  (clk),
    .we   (fcoef_we),
    .waddr(fcoef_waddr),
    .wdata(fcoef_wdata),
    .raddr(fcoef_raddr),
    .rdata(fcoef_rdata)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fc_valid_d <= 1'b0;
      for (int i = 0; i < FC_NW; i++) fc_y_d[i] <= '0;
    end else begin
      fc_valid_d <= fc_valid;
      if (fc_valid) fc_y_d <= fc_y;
    end
  end

  always_comb begin
    for (int n = 0; n < FC_OUT; n++)
      for (int k = 0; k < NC; k++)
        fc_coef[n][k] = signed'(fcoef_rdata[(n*NC + k)*COEF_W +: COEF_W]);
  end

  fc_engine #(
    .N_IN  (FC_IN),
    .N_OUT (FC_OUT),
    .NW    (FC_NW),
    .SUB   (FC_SUB),
    .ORDER (ORDER),
    .DATA_W(DATA_W),
    .COEF_W(COEF_W),
    .ACC_W (ACC_W)
  ) u_fc (
    .clk      (clk),
    .rst_n    (rst_n),
    .grp_valid(fc_valid_d),
    .grp_y    (fc_y_d),
    .grp_coef (fc_coef),
    .grp_idx  (grp_idx),
    .out_valid(fc_out_valid),
    .out_f    (fc_out)
  );

  classifier #(
    .N(FC_OUT),
    .W(ACC_W)
  ) u_cls (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (fc_out_valid),
    .scores   (fc_out),
    .out_valid(class_valid),
    .class_idx(class_idx)
  );

endmodule
