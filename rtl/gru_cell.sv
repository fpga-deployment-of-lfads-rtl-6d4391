// gru_cell: one quantised GRU layer, advanced one time step per start pulse.
//
// Two dense_mac engines compute, side by side, the input dense W x_t + b
// (3*N_UNITS outputs) and the recurrent dense U s_{t-1} + b_r (3*N_UNITS
// outputs); each output block is ordered z, r, h. When both have finished,
// N_UNITS gru_gate instances form the new state in one cycle and it is
// written to the state register s, which passes through the state quantiser
// (saturation to the data format) on its way into the recurrent dense.
// init loads s from s_init (zero for the encoder, the latent vector for the
// decoder). A step takes max(ceil(N_IN/PAR), ceil(N_UNITS/PAR)) + 2 cycles
// from start to the done pulse; s is stable from done until the next step
// ends. x must be valid in the start cycle only (the dense latches it).
// Weights are written through the two load ports (wx_* for the input dense,
// ws_* for the recurrent one), with the same addressing as dense_mac.
// The cell structure follows the model's quantised GRU; the schedule and the
// load ports are this design's.
module gru_cell #(
  parameter int unsigned N_IN    = 70,
  parameter int unsigned N_UNITS = 64,
  parameter int unsigned PAR     = 2,
  parameter int unsigned DW      = 16,
  parameter int unsigned DI      = 6,
  parameter int unsigned WW      = 16,
  parameter int unsigned WI      = 6,
  parameter int unsigned IDX_W   = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  init,
  input  logic signed [DW-1:0]  s_init [N_UNITS],
  input  logic                  start,
  input  logic signed [DW-1:0]  x [N_IN],
  output logic                  busy,
  output logic                  done,
  output logic signed [DW-1:0]  s [N_UNITS],
  input  logic                  wx_en,
  input  logic                  ws_en,
  input  logic                  w_bias,
  input  logic [IDX_W-1:0]      w_in,
  input  logic [IDX_W-1:0]      w_out,
  input  logic signed [WW-1:0]  w_data
);
  localparam int unsigned NG = 3 * N_UNITS;

  logic signed [DW-1:0] gx [NG];
  logic signed [DW-1:0] gs [NG];
  logic signed [DW-1:0] s_next [N_UNITS];
  logic                 x_busy, s_busy, x_done, s_done;
  logic                 x_have, s_have, run;

  dense_mac #(.N_IN(N_IN), .N_OUT(NG), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW), .WI(WI),
              .IDX_W(IDX_W)) u_dense_x (
    .clk, .rst_n, .start(start && !run && !init), .x(x), .busy(x_busy), .done(x_done), .y(gx),
    .wr_en(wx_en), .wr_bias(w_bias), .wr_in(w_in), .wr_out(w_out), .wr_data(w_data));

  dense_mac #(.N_IN(N_UNITS), .N_OUT(NG), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW), .WI(WI),
              .IDX_W(IDX_W)) u_dense_s (
    .clk, .rst_n, .start(start && !run && !init), .x(s), .busy(s_busy), .done(s_done), .y(gs),
    .wr_en(ws_en), .wr_bias(w_bias), .wr_in(w_in), .wr_out(w_out), .wr_data(w_data));

  for (genvar u = 0; u < N_UNITS; u++) begin : g_unit
    gru_gate #(.DW(DW), .DI(DI)) u_gate (
      .gx_z(gx[u]), .gx_r(gx[N_UNITS+u]), .gx_h(gx[2*N_UNITS+u]),
      .gs_z(gs[u]), .gs_r(gs[N_UNITS+u]), .gs_h(gs[2*N_UNITS+u]),
      .s_prev(s[u]), .s_new(s_next[u]));
  end

  assign busy = run;

  wire both = (x_have || x_done) && (s_have || s_done);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run    <= 1'b0;
      x_have <= 1'b0;
      s_have <= 1'b0;
      done   <= 1'b0;
      for (int u = 0; u < N_UNITS; u++) s[u] <= '0;
    end else begin
      done <= 1'b0;
      if (!run && init) begin
        for (int u = 0; u < N_UNITS; u++) s[u] <= s_init[u];
      end else if (!run && start) begin
        run <= 1'b1;
      end else if (run) begin
        if (both) begin
          for (int u = 0; u < N_UNITS; u++) s[u] <= s_next[u];
          run    <= 1'b0;
          x_have <= 1'b0;
          s_have <= 1'b0;
          done   <= 1'b1;
        end else begin
          if (x_done) x_have <= 1'b1;
          if (s_done) s_have <= 1'b1;
        end
      end
    end
  end

  a_no_init_when_busy: assert property (@(posedge clk) disable iff (!rst_n) init |-> !run);
endmodule
