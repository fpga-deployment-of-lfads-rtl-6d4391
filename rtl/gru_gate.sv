// gru_gate: the element-wise part of one quantised GRU unit.
//
// Given the unit's three pre-activations from the input dense (gx_*, input
// bias included) and from the recurrent dense (gs_*, recurrent bias
// included), and the previous state s_prev, it computes (Keras gate order
// z, r, h, reset applied after the recurrent dense):
//   z  = hard_sigmoid(gx_z + gs_z)
//   r  = hard_sigmoid(gx_r + gs_r)
//   hh = hard_tanh(gx_h + r*gs_h)
//   s  = z*s_prev + (1-z)*hh
// Each add and each product is brought back to the <DW,DI> data format by
// truncation and saturation. Purely combinational; the dataflow is that of
// the model's quantised GRU cell, the rounding at each step is this design's.
module gru_gate #(
  parameter int unsigned DW = 16,
  parameter int unsigned DI = 6
) (
  input  logic signed [DW-1:0] gx_z, gx_r, gx_h,
  input  logic signed [DW-1:0] gs_z, gs_r, gs_h,
  input  logic signed [DW-1:0] s_prev,
  output logic signed [DW-1:0] s_new
);
  localparam int unsigned DF = DW - DI;
  localparam int unsigned PW = 2 * DW + 1;
  localparam logic signed [DW-1:0] ONE = DW'(1) <<< DF;

  function automatic logic signed [DW-1:0] sat(input logic signed [PW-1:0] v);
    logic signed [PW-1:0] hi, lo;
    hi = PW'({1'b0, {(DW-1){1'b1}}});
    lo = -hi - 1;
    if (v > hi)      return {1'b0, {(DW-1){1'b1}}};
    else if (v < lo) return {1'b1, {(DW-1){1'b0}}};
    else             return v[DW-1:0];
  endfunction

  function automatic logic signed [DW-1:0] qadd(input logic signed [DW-1:0] a, b);
    return sat(PW'(a) + PW'(b));
  endfunction

  function automatic logic signed [DW-1:0] qmul(input logic signed [DW-1:0] a, b);
    return sat((PW'(a) * PW'(b)) >>> DF);
  endfunction

  logic signed [DW-1:0] a_z, a_r, a_h, z, r, hh;

  assign a_z = qadd(gx_z, gs_z);
  assign a_r = qadd(gx_r, gs_r);

  hard_sigmoid #(.DW(DW), .DI(DI)) u_sig_z (.x(a_z), .y(z));
  hard_sigmoid #(.DW(DW), .DI(DI)) u_sig_r (.x(a_r), .y(r));

  assign a_h = qadd(gx_h, qmul(r, gs_h));

  hard_tanh #(.DW(DW), .DI(DI)) u_tanh (.x(a_h), .y(hh));

  assign s_new = qadd(qmul(z, s_prev), qmul(ONE - z, hh));
endmodule
