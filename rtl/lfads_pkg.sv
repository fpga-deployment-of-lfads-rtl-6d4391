// lfads_pkg: constants shared by the LFADS inference datapath.
//
// The default sizes are those of the deployed model: 70 recording channels,
// 73 time steps per trial, a 64+64 unit bidirectional GRU encoder, a 64-unit
// GRU decoder whose initial state is the 64-dim latent vector, 4 latent factors, and the
// ap_fixed<16,6> number format (16 bits, 6 of them integer including the
// sign, so 10 fractional bits) used for data, state, weights and biases.
// Layer identifiers select which weight memory a parameter write goes to;
// their numbering is this design's own.
package lfads_pkg;

  localparam int unsigned N_CH_D  = 70;   // recording channels
  localparam int unsigned T_D     = 73;   // time steps per trial
  localparam int unsigned N_ENC_D = 64;   // units per encoder direction
  localparam int unsigned N_DEC_D = 64;   // decoder GRU units
  localparam int unsigned N_FAC_D = 4;    // latent factors f_t
  localparam int unsigned DW_D    = 16;   // data total bits
  localparam int unsigned DI_D    = 6;    // data integer bits (sign included)
  localparam int unsigned WW_D    = 16;   // weight total bits
  localparam int unsigned WI_D    = 6;    // weight integer bits
  localparam int unsigned PAR_D   = 2;    // inputs consumed per cycle per dense

  // Weight-memory select of the parameter load port.
  typedef enum logic [3:0] {
    L_ENC_FWD_X = 4'd0,  // encoder forward, input kernel + input bias
    L_ENC_FWD_S = 4'd1,  // encoder forward, recurrent kernel + recurrent bias
    L_ENC_BWD_X = 4'd2,  // encoder backward, input kernel + input bias
    L_ENC_BWD_S = 4'd3,  // encoder backward, recurrent kernel + recurrent bias
    L_LATENT    = 4'd4,  // latent layer 128 -> 64
    L_DEC_X     = 4'd5,  // decoder input bias (input is all zero)
    L_DEC_S     = 4'd6,  // decoder recurrent kernel + recurrent bias
    L_FACTOR    = 4'd7,  // factor FC 64 -> 4
    L_RATE      = 4'd8   // log-rate FC 4 -> 70
  } layer_e;

endpackage
