// bigru_encoder: bidirectional GRU encoder over one buffered trial.
//
// A forward and a backward gru_cell (N_UNITS each) start from a zero state
// and are stepped together for T time steps. At step t the forward cell reads
// time step t and the backward cell time step T-1-t; both rows come from the
// trial buffer, which is addressed through rd_t and returns the two rows in
// the same cycle. After the last step the two final states are concatenated,
// forward first, into h_cat, which holds until the next start. A start pulse
// begins a trial; done pulses when h_cat is valid. With
// NK = max(ceil(N_IN/PAR), ceil(N_UNITS/PAR)), one time step takes NK + 4
// cycles (issue, NK MAC cycles, dense output, state update, hand-over) and
// done rises T*(NK+4)+1 cycles after start: 2848 cycles at the defaults.
// Running the reversed sequence through its own GRU and concatenating
// follows the model's bidirectional wrapper; stepping both directions in
// lock step is this design's choice. Weight ports: wfx/wfs load the forward
// cell's input/recurrent dense, wbx/wbs the backward cell's.
module bigru_encoder #(
  parameter int unsigned T       = 73,
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
  input  logic                  start,
  output logic                  busy,
  output logic                  done,
  output logic [$clog2(T)-1:0]  rd_t,
  input  logic signed [DW-1:0]  fwd_row [N_IN],
  input  logic signed [DW-1:0]  bwd_row [N_IN],
  output logic signed [DW-1:0]  h_cat [2*N_UNITS],
  input  logic                  wfx_en, wfs_en, wbx_en, wbs_en,
  input  logic                  w_bias,
  input  logic [IDX_W-1:0]      w_in,
  input  logic [IDX_W-1:0]      w_out,
  input  logic signed [WW-1:0]  w_data
);
  localparam int unsigned TW = $clog2(T);

  typedef enum logic [1:0] {IDLE, ISSUE, WAIT, FIN} state_e;
  state_e st;

  logic signed [DW-1:0] zero_s [N_UNITS];
  logic signed [DW-1:0] s_f [N_UNITS];
  logic signed [DW-1:0] s_b [N_UNITS];
  logic                 f_busy, b_busy, f_done, b_done, f_have, b_have;
  logic                 init_c, step_c;

  always_comb for (int u = 0; u < N_UNITS; u++) zero_s[u] = '0;

  assign init_c = (st == IDLE) && start;
  assign step_c = (st == ISSUE);
  assign busy   = (st != IDLE);

  gru_cell #(.N_IN(N_IN), .N_UNITS(N_UNITS), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW), .WI(WI),
             .IDX_W(IDX_W)) u_fwd (
    .clk, .rst_n, .init(init_c), .s_init(zero_s), .start(step_c), .x(fwd_row),
    .busy(f_busy), .done(f_done), .s(s_f),
    .wx_en(wfx_en), .ws_en(wfs_en), .w_bias, .w_in, .w_out, .w_data);

  gru_cell #(.N_IN(N_IN), .N_UNITS(N_UNITS), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW), .WI(WI),
             .IDX_W(IDX_W)) u_bwd (
    .clk, .rst_n, .init(init_c), .s_init(zero_s), .start(step_c), .x(bwd_row),
    .busy(b_busy), .done(b_done), .s(s_b),
    .wx_en(wbx_en), .ws_en(wbs_en), .w_bias, .w_in, .w_out, .w_data);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= IDLE;
      rd_t   <= '0;
      done   <= 1'b0;
      f_have <= 1'b0;
      b_have <= 1'b0;
      for (int u = 0; u < 2*N_UNITS; u++) h_cat[u] <= '0;
    end else begin
      done <= 1'b0;
      case (st)
        IDLE: if (start) begin
          rd_t <= '0;
          st   <= ISSUE;
        end
        ISSUE: st <= WAIT;
        WAIT: begin
          if ((f_have || f_done) && (b_have || b_done)) begin
            f_have <= 1'b0;
            b_have <= 1'b0;
            if (rd_t == TW'(T - 1)) st <= FIN;
            else begin
              rd_t <= rd_t + 1'b1;
              st   <= ISSUE;
            end
          end else begin
            if (f_done) f_have <= 1'b1;
            if (b_done) b_have <= 1'b1;
          end
        end
        FIN: begin
          for (int u = 0; u < N_UNITS; u++) begin
            h_cat[u]           <= s_f[u];
            h_cat[N_UNITS + u] <= s_b[u];
          end
          done <= 1'b1;
          st   <= IDLE;
        end
        default: st <= IDLE;
      endcase
    end
  end
endmodule
