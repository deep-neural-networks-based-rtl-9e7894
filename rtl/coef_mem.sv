// coef_mem: on-chip store of the trained approximation coefficients.
//
// After training, every weight group is represented only by its polynomial
// coefficients, which is what makes the whole network small enough to keep
// on chip (1.42 KB for the LeNet-5 configuration built here). This is a
// plain array with one write port and one read port; the read is synchronous
// (rdata shows the word at raddr one clock after raddr is presented), as a
// register file or SRAM macro would behave. Contents are not reset.
//
// The paper gives only the storage size; the organisation (one wide word per
// filter or per weight group, so that an engine gets all the coefficients it
// needs in one read) is this design's choice.
module coef_mem #(
  parameter int unsigned WIDTH = 80,
  parameter int unsigned DEPTH = 78,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
