// hard_sigmoid: quantised hard sigmoid, y = clip(x/2 + 1/2, 0, 1 - 2^-DF).
//
// Input and output use the same <DW,DI> fixed-point format (DF = DW-DI
// fractional bits). x/2 is an arithmetic shift right by one (truncating), 1/2
// is a constant added in, and the clamp saturates to 0 below and to the
// largest value under 1 above; no multiplier and no look-up table are needed.
// The curve reaches 0 at x = -1 and its top step 1-2^-DF just under x = 1,
// which for a 4-bit output gives the 0 .. 0.9375 staircase of the model's
// quantised hard sigmoid. Purely combinational. Requires DI >= 2 so that 1/2
// and the clamp fit.
module hard_sigmoid #(
  parameter int unsigned DW = 16,
  parameter int unsigned DI = 6
) (
  input  logic signed [DW-1:0] x,
  output logic signed [DW-1:0] y
);
  localparam int unsigned DF = DW - DI;
  localparam logic signed [DW:0] HALF = (DW+1)'(1) <<< (DF - 1);
  localparam logic signed [DW:0] TOP  = ((DW+1)'(1) <<< DF) - 1;

  logic signed [DW:0] t;
  always_comb begin
    t = (DW+1)'(x >>> 1) + HALF;
    if (t < 0)        y = '0;
    else if (t > TOP) y = TOP[DW-1:0];
    else              y = t[DW-1:0];
  end
endmodule
