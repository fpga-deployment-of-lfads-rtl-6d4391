// dense_mac: fully connected layer y = q(W x + b) on a time-shared MAC array.
//
// This one engine serves every dense layer of the model: the input and
// recurrent kernels of each GRU (3*64 outputs), the latent layer, the factor
// layer and the log-rate layer. It has one multiply-accumulate lane per
// output. A start pulse latches the input vector x; then for NK =
// ceil(N_IN/PAR) cycles every lane adds PAR products w[i][o]*x[i] into its
// accumulator, and in one more cycle the bias is added and the sum is
// quantised back to the data format. done pulses and y is valid NK+1 cycles
// after start, and y holds until the next start. busy is high from the cycle
// after start up to the done pulse; a start while busy is ignored.
//
// Number formats are ap_fixed style: data <DW,DI>, weights and biases <WW,WI>,
// two's complement with DI/WI integer bits including the sign. Products keep
// every bit; the accumulator is DW+WW+clog2(N_IN+1)+1 bits wide, following the
// accumulator bit-width rule of the quantised GRU cell (weight bits + input
// bits + log2 of the number of accumulations), so it never overflows. The
// result is truncated toward minus infinity (ap_fixed's default rounding) and
// saturated (this design's choice; ap_fixed's default would wrap).
//
// Weights and biases live in register arrays written one value at a time
// through wr_*: wr_in selects the input index i (the row of W), wr_out the
// output o, and wr_bias selects the bias b[o] instead. The load port, PAR and
// the schedule are this design's own; the layer shapes are the model's.
module dense_mac #(
  parameter int unsigned N_IN  = 64,
  parameter int unsigned N_OUT = 192,
  parameter int unsigned PAR   = 2,
  parameter int unsigned DW    = 16,
  parameter int unsigned DI    = 6,
  parameter int unsigned WW    = 16,
  parameter int unsigned WI    = 6,
  parameter int unsigned IDX_W = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // compute
  input  logic                  start,
  input  logic signed [DW-1:0]  x [N_IN],
  output logic                  busy,
  output logic                  done,
  output logic signed [DW-1:0]  y [N_OUT],
  // parameter load
  input  logic                  wr_en,
  input  logic                  wr_bias,
  input  logic [IDX_W-1:0]      wr_in,
  input  logic [IDX_W-1:0]      wr_out,
  input  logic signed [WW-1:0]  wr_data
);
  localparam int unsigned NK    = (N_IN + PAR - 1) / PAR;
  localparam int unsigned KW    = (NK > 1) ? $clog2(NK) : 1;
  localparam int unsigned DF    = DW - DI;
  localparam int unsigned WF    = WW - WI;
  localparam int unsigned ACC_W = DW + WW + $clog2(N_IN + 1) + 1;

  logic signed [WW-1:0]    w_mem [N_IN][N_OUT];
  logic signed [WW-1:0]    b_mem [N_OUT];
  logic signed [DW-1:0]    x_reg [N_IN];
  logic signed [ACC_W-1:0] acc   [N_OUT];
  logic [KW-1:0]           k;
  logic                    run, fin;

  assign busy = run || fin;

  // Saturate a wide value to DW bits.
  function automatic logic signed [DW-1:0] sat(input logic signed [ACC_W-1:0] v);
    logic signed [ACC_W-1:0] hi, lo;
    hi = ACC_W'({1'b0, {(DW-1){1'b1}}});
    lo = -hi - 1;
    if (v > hi)      return {1'b0, {(DW-1){1'b1}}};
    else if (v < lo) return {1'b1, {(DW-1){1'b0}}};
    else             return v[DW-1:0];
  endfunction

  // Sum of the PAR products of lane o in step kk.
  function automatic logic signed [ACC_W-1:0] step_sum(input int o, input logic [KW-1:0] kk);
    logic signed [ACC_W-1:0] sum;
    int unsigned i;
    sum = '0;
    for (int p = 0; p < PAR; p++) begin
      i = int'(kk) * PAR + p;
      if (i < N_IN) sum += ACC_W'(w_mem[i][o]) * ACC_W'(x_reg[i]);
    end
    return sum;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run  <= 1'b0;
      fin  <= 1'b0;
      done <= 1'b0;
      k    <= '0;
      for (int o = 0; o < N_OUT; o++) begin
        acc[o] <= '0;
        y[o]   <= '0;
      end
      for (int i = 0; i < N_IN; i++) x_reg[i] <= '0;
    end else begin
      done <= 1'b0;
      if (start && !run && !fin) begin
        run  <= 1'b1;
        k    <= '0;
        for (int i = 0; i < N_IN; i++)  x_reg[i] <= x[i];
        for (int o = 0; o < N_OUT; o++) acc[o] <= '0;
      end else if (run) begin
        for (int o = 0; o < N_OUT; o++) acc[o] <= acc[o] + step_sum(o, k);
        if (k == KW'(NK - 1)) begin
          run  <= 1'b0;
          fin  <= 1'b1;
        end
        k <= k + 1'b1;
      end else if (fin) begin
        fin  <= 1'b0;
        done <= 1'b1;
        for (int o = 0; o < N_OUT; o++)
          y[o] <= sat((acc[o] + (ACC_W'(b_mem[o]) <<< DF)) >>> WF);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (wr_en && (int'(wr_out) < N_OUT)) begin
      if (wr_bias)                   b_mem[wr_out] <= wr_data;
      else if (int'(wr_in) < N_IN)   w_mem[wr_in][wr_out] <= wr_data;
    end
  end

  a_no_start_when_busy: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
endmodule
