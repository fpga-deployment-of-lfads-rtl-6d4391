// exp_unit: fixed-point exponential, y = exp(x), for the firing rates.
//
// exp(x) is computed as 2^(x*log2 e). x is multiplied by log2 e held with 16
// fractional bits (94548 = round(1.4426950409 * 2^16)). The product splits
// into an integer part n (floor) and a fraction f in [0,1). 2^f comes from a
// 9-point table, E[k] = round(2^(k/8) * 2^14) for k = 0..8, with linear
// interpolation between neighbouring points (relative error under 0.2%),
// and the mantissa is then shifted by n. Results above the largest <DW,DI>
// value saturate; results below one LSB become 0. Purely combinational.
// The exponential stage itself is the model's; this way of computing it is
// this design's choice.
module exp_unit #(
  parameter int unsigned DW = 16,
  parameter int unsigned DI = 6
) (
  input  logic signed [DW-1:0] x,
  output logic signed [DW-1:0] y
);
  localparam int unsigned DF   = DW - DI;
  localparam int unsigned LF   = 16;               // fraction bits of log2 e
  localparam int unsigned TF   = DF + LF;          // fraction bits of x*log2 e
  localparam int unsigned PW   = DW + 18;
  localparam logic signed [17:0] LOG2E = 18'sd94548;
  localparam int unsigned RB   = TF - 3;           // bits below the table index

  localparam logic [15:0] E [9] = '{16'd16384, 16'd17867, 16'd19484, 16'd21247, 16'd23170,
                                    16'd25268, 16'd27554, 16'd30048, 16'd32768};

  logic signed [PW-1:0] t;
  logic signed [PW-1:0] n;
  logic [TF-1:0]        f;
  logic [2:0]           seg;
  logic [RB-1:0]        r;
  logic [15:0]          e0, e1;
  logic [RB+16:0]       mant;          // 2^f with 14+RB fraction bits
  logic [PW+RB+16:0]    scaled;
  localparam logic [DW-1:0] YMAX = {1'b0, {(DW-1){1'b1}}};
  localparam logic signed [PW-1:0] N_SAT = PW'(DI - 1);   // 2^n at or above the top
  localparam logic signed [PW-1:0] N_DF  = PW'(DF);

  always_comb begin
    t      = PW'(x) * PW'(LOG2E);
    n      = t >>> TF;
    f      = t[TF-1:0];
    seg    = f[TF-1 -: 3];
    r      = f[RB-1:0];
    e0     = E[seg];
    e1     = E[4'(seg) + 4'd1];
    mant   = ((RB+17)'(e0) << RB) + (RB+17)'(e1 - e0) * (RB+17)'(r);
    scaled = '0;
    y      = '0;
    // value = mant * 2^(n - 14 - RB); in units of 2^-DF: mant * 2^(n + DF - 14 - RB)
    if (n >= N_SAT) begin
      y = YMAX;
    end else if (n + N_DF >= 0) begin
      scaled = ((PW+RB+17)'(mant) << (n + N_DF)) >> (14 + RB);
      y = (scaled > (PW+RB+17)'(YMAX)) ? YMAX : scaled[DW-1:0];
    end else begin
      y = '0;
    end
  end
endmodule
