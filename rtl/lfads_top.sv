// lfads_top: autoencoder-style LFADS inference for one trial at a time.
//
// Dataflow (one trial = T time steps of N_CH spike counts):
//   input stream -> stream_fifo -> seq_buffer (whole trial)
//   -> bigru_encoder (forward over t, backward over T-1-t, N_ENC units each)
//   -> latent dense (2*N_ENC -> N_DEC), the decoder's initial state (the
//      latent size equals the decoder size, 64)
//   -> decoder gru_cell (N_DEC units, input all zero) stepped T times
//   -> per step: factor dense (N_DEC -> N_FAC) gives f_t,
//      rate dense (N_FAC -> N_CH) gives log r_t, exp_unit gives r_t
//   -> stream_fifo -> output stream (f_t, log r_t and r_t of one step per beat)
//
// Interface. Input: in_valid/in_ready/in_data carry one time step (all N_CH
// channels, each <DW,DI>) per beat; T beats make a trial. Output:
// out_valid/out_ready with out_factor, out_lograte and out_rate, T beats per
// trial. Parameters: w_en writes one weight or bias (w_bias) of layer w_layer
// (lfads_pkg::layer_e) at input index w_in and output index w_out; load them
// before the first trial. trial_done pulses when a trial's last beat enters
// the output FIFO.
//
// Control. Each stage has a result-held flag, and a stage starts only when
// its input is ready and its own result has been taken, so backpressure on the
// output stream stalls the decoder and a full trial buffer stalls the input
// stream. The buffer is released as soon as the encoder has finished, so the
// next trial can be loaded while the current one is decoded, and its encoding
// can start while the decoder is still busy; the decoder takes the latent vector
// once it is free. The decoder's next step starts in the same cycle the
// factor dense takes the previous state.
// The layer sizes, the number format and the zero decoder input are the
// model's; the schedule, the handshakes and the load port are this design's.
module lfads_top
  import lfads_pkg::*;
#(
  parameter int unsigned T          = T_D,
  parameter int unsigned N_CH       = N_CH_D,
  parameter int unsigned N_ENC      = N_ENC_D,
  parameter int unsigned N_DEC      = N_DEC_D,
  parameter int unsigned N_FAC      = N_FAC_D,
  parameter int unsigned PAR        = PAR_D,
  parameter int unsigned DW         = DW_D,
  parameter int unsigned DI         = DI_D,
  parameter int unsigned WW         = WW_D,
  parameter int unsigned WI         = WI_D,
  parameter int unsigned FIFO_DEPTH = 4,
  parameter int unsigned IDX_W      = 8
) (
  input  logic                  clk,
  input  logic                  rst_n,
  // parameter load
  input  logic                  w_en,
  input  logic [3:0]            w_layer,
  input  logic                  w_bias,
  input  logic [IDX_W-1:0]      w_in,
  input  logic [IDX_W-1:0]      w_out,
  input  logic signed [WW-1:0]  w_data,
  // input stream: one time step per beat
  input  logic                  in_valid,
  output logic                  in_ready,
  input  logic signed [DW-1:0]  in_data [N_CH],
  // output stream: one time step per beat
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic signed [DW-1:0]  out_factor [N_FAC],
  output logic signed [DW-1:0]  out_lograte [N_CH],
  output logic signed [DW-1:0]  out_rate [N_CH],
  output logic                  trial_done
);
  localparam int unsigned TW    = $clog2(T);
  localparam int unsigned IN_W  = N_CH * DW;
  localparam int unsigned OUT_W = (N_FAC + 2 * N_CH) * DW;

  // ---------------------------------------------------------------- weights
  wire we_efx = w_en && (w_layer == L_ENC_FWD_X);
  wire we_efs = w_en && (w_layer == L_ENC_FWD_S);
  wire we_ebx = w_en && (w_layer == L_ENC_BWD_X);
  wire we_ebs = w_en && (w_layer == L_ENC_BWD_S);
  wire we_lat = w_en && (w_layer == L_LATENT);
  wire we_dx  = w_en && (w_layer == L_DEC_X);
  wire we_ds  = w_en && (w_layer == L_DEC_S);
  wire we_fac = w_en && (w_layer == L_FACTOR);
  wire we_rat = w_en && (w_layer == L_RATE);

  // ---------------------------------------------------------------- input
  logic [IN_W-1:0]      in_flat, buf_flat;
  logic                 buf_valid, buf_ready;
  logic signed [DW-1:0] buf_row [N_CH];

  always_comb for (int c = 0; c < N_CH; c++) in_flat[c*DW +: DW] = in_data[c];

  stream_fifo #(.WIDTH(IN_W), .DEPTH(FIFO_DEPTH)) u_in_fifo (
    .clk, .rst_n, .in_valid, .in_ready, .in_data(in_flat),
    .out_valid(buf_valid), .out_ready(buf_ready), .out_data(buf_flat));

  always_comb for (int c = 0; c < N_CH; c++) buf_row[c] = buf_flat[c*DW +: DW];

  logic                 buf_full, buf_release;
  logic [TW-1:0]        rd_t;
  logic signed [DW-1:0] fwd_row [N_CH];
  logic signed [DW-1:0] bwd_row [N_CH];

  seq_buffer #(.T(T), .N_CH(N_CH), .DW(DW)) u_buf (
    .clk, .rst_n, .wr_valid(buf_valid), .wr_ready(buf_ready), .wr_row(buf_row),
    .full(buf_full), .release_buf(buf_release), .rd_t, .fwd_row, .bwd_row);

  // ---------------------------------------------------------------- encoder
  logic                 enc_start, enc_busy, enc_done, enc_res;
  logic signed [DW-1:0] h_cat [2*N_ENC];

  assign enc_start   = buf_full && !enc_busy && !enc_done && !enc_res;
  assign buf_release = enc_done;

  bigru_encoder #(.T(T), .N_IN(N_CH), .N_UNITS(N_ENC), .PAR(PAR), .DW(DW), .DI(DI),
                  .WW(WW), .WI(WI), .IDX_W(IDX_W)) u_enc (
    .clk, .rst_n, .start(enc_start), .busy(enc_busy), .done(enc_done), .rd_t,
    .fwd_row, .bwd_row, .h_cat,
    .wfx_en(we_efx), .wfs_en(we_efs), .wbx_en(we_ebx), .wbs_en(we_ebs),
    .w_bias, .w_in, .w_out, .w_data);

  // ---------------------------------------------------------------- latent
  logic                 lat_start, lat_busy, lat_done, lat_res;
  logic signed [DW-1:0] g0 [N_DEC];   // latent vector = decoder initial state
  logic                 dec_active;

  assign lat_start = enc_res && !lat_busy && !lat_done && !lat_res;

  dense_mac #(.N_IN(2*N_ENC), .N_OUT(N_DEC), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW), .WI(WI),
              .IDX_W(IDX_W)) u_latent (
    .clk, .rst_n, .start(lat_start), .x(h_cat), .busy(lat_busy), .done(lat_done), .y(g0),
    .wr_en(we_lat), .wr_bias(w_bias), .wr_in(w_in), .wr_out(w_out), .wr_data(w_data));

  // ---------------------------------------------------------------- decoder
  logic                 dec_init, dec_start, dec_busy, dec_done, dec_new;
  logic [TW:0]          dec_issued, out_count;
  logic signed [DW-1:0] dec_zero [1];
  logic signed [DW-1:0] s_dec [N_DEC];

  assign dec_zero[0] = '0;
  assign dec_init    = lat_res && !dec_active;

  gru_cell #(.N_IN(1), .N_UNITS(N_DEC), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW), .WI(WI),
             .IDX_W(IDX_W)) u_dec (
    .clk, .rst_n, .init(dec_init), .s_init(g0), .start(dec_start), .x(dec_zero),
    .busy(dec_busy), .done(dec_done), .s(s_dec),
    .wx_en(we_dx), .ws_en(we_ds), .w_bias, .w_in, .w_out, .w_data);

  // ---------------------------------------------------------------- readout
  logic                 fac_start, fac_busy, fac_done, fac_res;
  logic                 rat_start, rat_busy, rat_done, rat_res;
  logic signed [DW-1:0] f_t [N_FAC];
  logic signed [DW-1:0] f_hold [N_FAC];
  logic signed [DW-1:0] logr [N_CH];
  logic signed [DW-1:0] rate [N_CH];

  assign fac_start = dec_new && !fac_busy && !fac_done && !fac_res;
  // first step right after init; later steps when the factor layer takes the state
  assign dec_start = dec_active && !dec_busy && !dec_done && (dec_issued < (TW+1)'(T)) &&
                     ((dec_issued == '0) || fac_start);

  dense_mac #(.N_IN(N_DEC), .N_OUT(N_FAC), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW), .WI(WI),
              .IDX_W(IDX_W)) u_factor (
    .clk, .rst_n, .start(fac_start), .x(s_dec), .busy(fac_busy), .done(fac_done), .y(f_t),
    .wr_en(we_fac), .wr_bias(w_bias), .wr_in(w_in), .wr_out(w_out), .wr_data(w_data));

  assign rat_start = fac_res && !rat_busy && !rat_done && !rat_res;

  dense_mac #(.N_IN(N_FAC), .N_OUT(N_CH), .PAR(PAR), .DW(DW), .DI(DI), .WW(WW), .WI(WI),
              .IDX_W(IDX_W)) u_rate (
    .clk, .rst_n, .start(rat_start), .x(f_t), .busy(rat_busy), .done(rat_done), .y(logr),
    .wr_en(we_rat), .wr_bias(w_bias), .wr_in(w_in), .wr_out(w_out), .wr_data(w_data));

  for (genvar c = 0; c < N_CH; c++) begin : g_exp
    exp_unit #(.DW(DW), .DI(DI)) u_exp (.x(logr[c]), .y(rate[c]));
  end

  // ---------------------------------------------------------------- output
  logic [OUT_W-1:0] push_flat, pop_flat;
  logic             push_ready, push;

  always_comb begin
    for (int i = 0; i < N_FAC; i++) push_flat[i*DW +: DW] = f_hold[i];
    for (int c = 0; c < N_CH; c++) begin
      push_flat[(N_FAC + c)*DW +: DW]        = logr[c];
      push_flat[(N_FAC + N_CH + c)*DW +: DW] = rate[c];
    end
  end

  assign push = rat_res && push_ready;

  stream_fifo #(.WIDTH(OUT_W), .DEPTH(FIFO_DEPTH)) u_out_fifo (
    .clk, .rst_n, .in_valid(rat_res), .in_ready(push_ready), .in_data(push_flat),
    .out_valid, .out_ready, .out_data(pop_flat));

  always_comb begin
    for (int i = 0; i < N_FAC; i++) out_factor[i] = pop_flat[i*DW +: DW];
    for (int c = 0; c < N_CH; c++) begin
      out_lograte[c] = pop_flat[(N_FAC + c)*DW +: DW];
      out_rate[c]    = pop_flat[(N_FAC + N_CH + c)*DW +: DW];
    end
  end

  // ---------------------------------------------------------------- control
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      enc_res    <= 1'b0;
      lat_res    <= 1'b0;
      dec_active <= 1'b0;
      dec_new    <= 1'b0;
      dec_issued <= '0;
      out_count  <= '0;
      fac_res    <= 1'b0;
      rat_res    <= 1'b0;
      trial_done <= 1'b0;
      for (int i = 0; i < N_FAC; i++) f_hold[i] <= '0;
    end else begin
      trial_done <= 1'b0;
      if (enc_done)  enc_res <= 1'b1;
      if (lat_start) enc_res <= 1'b0;
      if (lat_done)  lat_res <= 1'b1;
      if (dec_init) begin
        lat_res    <= 1'b0;
        dec_active <= 1'b1;
        dec_issued <= '0;
        out_count  <= '0;
      end
      if (dec_start) dec_issued <= dec_issued + 1'b1;
      if (dec_done)  dec_new <= 1'b1;
      else if (fac_start) dec_new <= 1'b0;
      if (fac_done)  fac_res <= 1'b1;
      else if (rat_start) fac_res <= 1'b0;
      if (rat_start) for (int i = 0; i < N_FAC; i++) f_hold[i] <= f_t[i];
      if (rat_done)  rat_res <= 1'b1;
      else if (push) rat_res <= 1'b0;
      if (push) begin
        out_count <= out_count + 1'b1;
        if (out_count == (TW+1)'(T - 1)) begin
          dec_active <= 1'b0;
          trial_done <= 1'b1;
        end
      end
    end
  end

  a_no_lost_state:  assert property (@(posedge clk) disable iff (!rst_n) dec_done |-> !dec_new);
  a_no_lost_factor: assert property (@(posedge clk) disable iff (!rst_n) fac_done |-> !fac_res);
  a_no_lost_rate:   assert property (@(posedge clk) disable iff (!rst_n) rat_done |-> !rat_res);
endmodule
