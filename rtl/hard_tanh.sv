// hard_tanh: quantised hard tanh derived from the hard sigmoid,
// y = 2*hard_sigmoid(x) - 1.
//
// Input and output use the same <DW,DI> fixed-point format. The hard sigmoid
// output is doubled by a one-bit left shift and 1 is subtracted, so the result
// is clip(x, -1, 1 - 2^-(DF-1)) with the LSB of x dropped; for a 4-bit output
// this is the -1 .. 0.875 staircase of the model's quantised hard tanh. Only
// wiring and one subtraction. Purely combinational.
module hard_tanh #(
  parameter int unsigned DW = 16,
  parameter int unsigned DI = 6
) (
  input  logic signed [DW-1:0] x,
  output logic signed [DW-1:0] y
);
  localparam int unsigned DF = DW - DI;
  localparam logic signed [DW-1:0] ONE = DW'(1) <<< DF;

  logic signed [DW-1:0] hs;
  hard_sigmoid #(.DW(DW), .DI(DI)) u_hsig (.x(x), .y(hs));

  assign y = (hs <<< 1) - ONE;
endmodule
