// conv_engine: convolution of one ifmap channel with one approximated filter,
// producing one complete output-map column per clock.
//
// Structure (after the paper's convolution architecture):
//   * coefficient registers: the filter's K rows, each stored as its fitted
//     polynomial coefficients c[row][0..ORDER]; loaded once and held while
//     the whole ifmap streams past (filter reuse);
//   * window registers: for every ifmap row a K-deep shift register. Each
//     accepted ifmap column shifts every row right by one position, so
//     win[r][x] holds ifmap element (r, c-K+1+x) after column c (ifmap
//     reuse);
//   * H reuse units, one per ifmap row, turning the row's K window values
//     into d0..d_ORDER (computation reuse);
//   * the K x (H-K+1) PE array, whose column sums are the output column.
//
// Interface and timing: present ifmap column c on col_in with col_valid;
// mark column 0 of each ifmap with col_first. There is no back-pressure.
// From the K-th column on, every accepted column c produces output column
// c-K+1 on out_col one clock later, flagged by out_valid and out_idx.
// coef_load copies coef_in into the coefficient registers at the clock edge.
// rst_n is asynchronous and active low.
//
// The array shape, the diagonal reuse and the column shift are the paper's;
// the streaming handshake, the one-cycle register stage, the widths and the
// reset are this design's choices.
module conv_engine #(
  parameter int unsigned H      = 28,
  parameter int unsigned K      = 5,
  parameter int unsigned ORDER  = 1,
  parameter int unsigned DATA_W = dnn_pkg::DATA_W,
  parameter int unsigned COEF_W = dnn_pkg::COEF_W,
  parameter int unsigned ACC_W  = dnn_pkg::ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     coef_load,
  input  logic signed [COEF_W-1:0] coef_in  [K][ORDER+1],
  input  logic                     col_valid,
  input  logic                     col_first,
  input  logic signed [DATA_W-1:0] col_in   [H],
  output logic                     out_valid,
  output logic [15:0]              out_idx,
  output logic signed [ACC_W-1:0]  out_col  [H-K+1]
);

  localparam int unsigned OUT_ROWS = H - K + 1;
  localparam int unsigned D_W      = dnn_pkg::d_width(K - 1, ORDER, DATA_W);

  logic signed [COEF_W-1:0] coef [K][ORDER+1];
  logic signed [DATA_W-1:0] win  [H][K];
  logic [15:0]              ncol;        // columns accepted in this ifmap
  logic [15:0]              ncol_next;
  logic                     win_valid;   // win holds a full K-column window
  logic [15:0]              win_idx;     // output column that window gives

  logic signed [D_W-1:0]    d       [H][ORDER+1];
  logic signed [ACC_W-1:0]  col_sum [OUT_ROWS];

  // Filter coefficients, held stationary.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < K; i++)
        for (int k = 0; k <= ORDER; k++) coef[i][k] <= '0;
    end else if (coef_load) begin
      coef <= coef_in;
    end
  end

  assign ncol_next = col_first ? 16'd1
                   : (ncol == 16'hFFFF) ? ncol : ncol + 16'd1;

  // Window shift registers: every row moves one column per accepted column.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < H; r++)
        for (int x = 0; x < K; x++) win[r][x] <= '0;
      ncol      <= '0;
      win_valid <= 1'b0;
      win_idx   <= '0;
    end else begin
      win_valid <= 1'b0;
      if (col_valid) begin
        for (int r = 0; r < H; r++) begin
          for (int x = 0; x < K - 1; x++) win[r][x] <= win[r][x+1];
          win[r][K-1] <= col_in[r];
        end
        ncol      <= ncol_next;
        win_valid <= (ncol_next >= 16'(K));
        win_idx   <= ncol_next - 16'(K);
      end
    end
  end

  // One reuse unit per ifmap row.
  for (genvar r = 0; r < H; r++) begin : g_reuse
    reuse_unit #(
      .N     (K),
      .X0    (0),
      .ORDER (ORDER),
      .DATA_W(DATA_W),
      .D_W   (D_W)
    ) u_reuse (
      .y(win[r]),
      .d(d[r])
    );
  end

  conv_pe_array #(
    .H     (H),
    .K     (K),
    .ORDER (ORDER),
    .COEF_W(COEF_W),
    .D_W   (D_W),
    .ACC_W (ACC_W)
  ) u_array (
    .c      (coef),
    .d      (d),
    .col_sum(col_sum)
  );

  // Output register: one output column per clock.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_idx   <= '0;
      for (int j = 0; j < OUT_ROWS; j++) out_col[j] <= '0;
    end else begin
      out_valid <= win_valid;
      if (win_valid) begin
        out_idx <= win_idx;
        out_col <= col_sum;
      end
    end
  end

endmodule
