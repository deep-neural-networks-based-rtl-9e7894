// fc_engine: fully connected layer with approximated weight groups.
//
// The N_IN weights of every output neuron are cut into N_IN/NW groups of NW
// consecutive weights; each group is stored as fitted coefficients
// c0, c1 (, c2) with w(x) = c0 + c1*x (+ c2*x^2), x = 0..NW-1. One group of
// inputs is taken per clock:
//   * the group is split into NSUB = NW/SUB sub-blocks R1..R_NSUB. Sub-block
//     s is a reuse unit over inputs s*SUB .. s*SUB+SUB-1 whose x runs on
//     across the group (offset X0 = s*SUB), e.g. R2 of a 9-weight group gives
//     d0 = y3+y4+y5, d1 = 3y3+4y4+5y5;
//   * a PE array of NSUB rows by N_OUT columns: column n holds neuron n's
//     coefficients for this group (reused down the column), row s reads
//     sub-block s (reused along the row); the column sum is neuron n's dot
//     product with the group;
//   * one accumulator per neuron adds the column sums over the groups.
//
// Interface and timing: present group g (0 .. N_IN/NW-1, in order) on grp_y
// with grp_valid, together with every neuron's coefficients of that group on
// grp_coef. grp_idx tells which group is expected next. The edge that accepts
// the last group loads the finished sums into out_f; out_valid is high for
// the following clock. A new input vector may follow without a gap.
// rst_n is asynchronous and active low.
//
// The sub-block split, the PE mapping and the reuse directions are the
// paper's; the group-serial schedule, the handshake and the widths are this
// design's choices.
module fc_engine #(
  parameter int unsigned N_IN   = 192,
  parameter int unsigned N_OUT  = 10,
  parameter int unsigned NW     = 6,
  parameter int unsigned SUB    = 3,
  parameter int unsigned ORDER  = 1,
  parameter int unsigned DATA_W = dnn_pkg::DATA_W,
  parameter int unsigned COEF_W = dnn_pkg::COEF_W,
  parameter int unsigned ACC_W  = dnn_pkg::ACC_W,
  localparam int unsigned NGRP  = N_IN / NW,
  localparam int unsigned GI_W  = (NGRP > 1) ? $clog2(NGRP) : 1
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     grp_valid,
  input  logic signed [DATA_W-1:0] grp_y    [NW],
  input  logic signed [COEF_W-1:0] grp_coef [N_OUT][ORDER+1],
  output logic [GI_W-1:0]          grp_idx,
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  out_f    [N_OUT]
);

  localparam int unsigned NSUB = NW / SUB;
  localparam int unsigned D_W  = dnn_pkg::d_width(NW - 1, ORDER, DATA_W);

  if (NW % SUB != 0 || N_IN % NW != 0) begin : g_bad_params
    $error("fc_engine: NW must be a multiple of SUB and N_IN of NW");
  end

  logic signed [D_W-1:0]   d    [NSUB][ORDER+1];
  logic signed [ACC_W-1:0] col_sum [N_OUT];
  logic signed [ACC_W-1:0] acc  [N_OUT];

  // Sub-blocks R1..R_NSUB of the computational reuse block.
  for (genvar s = 0; s < NSUB; s++) begin : g_sub
    logic signed [DATA_W-1:0] ys [SUB];
    for (genvar i = 0; i < SUB; i++) begin : g_in
      assign ys[i] = grp_y[s*SUB + i];
    end
    reuse_unit #(
      .N     (SUB),
      .X0    (s * SUB),
      .ORDER (ORDER),
      .DATA_W(DATA_W),
      .D_W   (D_W)
    ) u_reuse (
      .y(ys),
      .d(d[s])
    );
  end

  // PE array: NSUB rows (sub-blocks) by N_OUT columns (output neurons).
  for (genvar n = 0; n < N_OUT; n++) begin : g_col
    for (genvar s = 0; s < NSUB; s++) begin : g_row
      // pin enters PE(s,n) from the PE above, pout leaves it downwards.
      logic signed [ACC_W-1:0] pin, pout;
      if (s == 0) begin : g_top
        assign pin = '0;
      end else begin : g_chain
        assign pin = g_col[n].g_row[s-1].pout;
      end
      reuse_pe #(
        .ORDER (ORDER),
        .COEF_W(COEF_W),
        .D_W   (D_W),
        .ACC_W (ACC_W)
      ) u_pe (
        .c       (grp_coef[n]),
        .d       (d[s]),
        .psum_in (pin),
        .psum_out(pout)
      );
    end
    assign col_sum[n] = g_col[n].g_row[NSUB-1].pout;
  end

  // Running sum including the group now presented.
  logic signed [ACC_W-1:0] next_sum [N_OUT];
  always_comb begin
    for (int n = 0; n < N_OUT; n++)
      next_sum[n] = (grp_idx == '0) ? col_sum[n] : acc[n] + col_sum[n];
  end

  // Accumulate over the groups of one input vector.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      grp_idx   <= '0;
      out_valid <= 1'b0;
      for (int n = 0; n < N_OUT; n++) begin
        acc[n]   <= '0;
        out_f[n] <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      if (grp_valid) begin
        acc <= next_sum;
        if (grp_idx == GI_W'(NGRP - 1)) out_f <= next_sum;
        if (grp_idx == GI_W'(NGRP - 1)) begin
          grp_idx   <= '0;
          out_valid <= 1'b1;
        end else begin
          grp_idx <= grp_idx + 1'b1;
        end
      end
    end
  end

endmodule
