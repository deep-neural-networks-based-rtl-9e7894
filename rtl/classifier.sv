// classifier: final classification step, an arg-max over the output layer.
//
// The class is the index of the largest output-neuron sum. Sigmoid and
// softmax are monotonic, so taking the arg-max before them gives the same
// class and neither has to be built. Ties go to the lowest index.
//
// Interface and timing: scores[0..N-1] (signed W-bit) with in_valid; the
// chosen class appears on class_idx with out_valid one clock later. rst_n is
// asynchronous and active low. The paper only names the classification
// stage; the arg-max is this design's choice.
module classifier #(
  parameter int unsigned N = 10,
  parameter int unsigned W = dnn_pkg::ACC_W,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] scores [N],
  output logic                out_valid,
  output logic [IW-1:0]       class_idx
);

  logic [IW-1:0]       best_idx;
  logic signed [W-1:0] best_val;

  always_comb begin
    best_idx = '0;
    best_val = scores[0];
    for (int unsigned n = 1; n < N; n++) begin
      if (scores[n] > best_val) begin
        best_val = scores[n];
        best_idx = IW'(n);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      class_idx <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) class_idx <= best_idx;
    end
  end

endmodule
