// ae_pkg -- shared sizes, number formats and coefficient address map of the
// DNN variational-autoencoder anomaly detector.
//
// The network sizes (57 inputs, hidden layers of 32 and 16 nodes, a 3-wide
// latent space) and the 8-bit word size follow the published model.  The split
// of the 8 bits into integer and fraction bits, the raw input format, the leaky
// ReLU slope and the coefficient address map are choices of this design; they
// are collected here so that a retrained model only needs new constants here.
//
// Number formats (two's complement, value = integer / 2**FRAC):
//   raw input      IN_W=16, IN_FRAC=2   (e.g. pT in 0.25 GeV steps)
//   activation     A_W=8,   A_FRAC=4    (range -8 .. +7.9375)
//   weight         W_W=8,   W_FRAC=6    (range -2 .. +1.984)
//   BN scale       8 bits, BN0_S_FRAC=8 for the input layer, BNH_S_FRAC=6 after
//   bias, BN shift activation format
//   score          SCORE_W=24 unsigned, 2*A_FRAC=8 fraction bits
// Every requantization truncates toward minus infinity and saturates.
package ae_pkg;

  // ---- network shape ------------------------------------------------------
  localparam int unsigned N_OBJ  = 19;  // 4 muons, 4 electrons, 10 jets, MET
  localparam int unsigned N_FEAT = 3;   // pT, eta, phi
  localparam int unsigned N_IN   = N_OBJ * N_FEAT;  // 57
  localparam int unsigned N_H1   = 32;
  localparam int unsigned N_H2   = 16;
  localparam int unsigned N_LAT  = 3;

  // ---- number formats -----------------------------------------------------
  localparam int unsigned IN_W       = 16;
  localparam int unsigned IN_FRAC    = 2;
  localparam int unsigned A_W        = 8;
  localparam int unsigned A_FRAC     = 4;
  localparam int unsigned W_W        = 8;
  localparam int unsigned W_FRAC     = 6;
  localparam int unsigned BN0_S_FRAC = 8;
  localparam int unsigned BNH_S_FRAC = 6;
  localparam int unsigned EXP_W      = 20;  // exp() table entries, 2*A_FRAC fraction bits
  localparam int unsigned SCORE_W    = 24;

  // leaky ReLU slope alpha = LRELU_ALPHA / 2**LRELU_FRAC (0.3 -> 77/256)
  localparam int unsigned LRELU_FRAC  = 8;
  localparam int unsigned LRELU_ALPHA = 77;

  typedef logic signed [IN_W-1:0] raw_t;
  typedef logic signed [A_W-1:0]  act_t;
  typedef logic signed [W_W-1:0]  wgt_t;
  typedef logic [SCORE_W-1:0]     score_t;

  // ---- coefficient address map (one byte per coefficient) -----------------
  // Weight w[j][i] (output j, input i) of a layer sits at W_OFF + j*N_in + i.
  localparam int unsigned OFF_BN0_S = 0;
  localparam int unsigned OFF_BN0_B = OFF_BN0_S + N_IN;
  localparam int unsigned OFF_D1_W  = OFF_BN0_B + N_IN;
  localparam int unsigned OFF_D1_B  = OFF_D1_W  + N_H1 * N_IN;
  localparam int unsigned OFF_BN1_S = OFF_D1_B  + N_H1;
  localparam int unsigned OFF_BN1_B = OFF_BN1_S + N_H1;
  localparam int unsigned OFF_D2_W  = OFF_BN1_B + N_H1;
  localparam int unsigned OFF_D2_B  = OFF_D2_W  + N_H2 * N_H1;
  localparam int unsigned OFF_BN2_S = OFF_D2_B  + N_H2;
  localparam int unsigned OFF_BN2_B = OFF_BN2_S + N_H2;
  localparam int unsigned OFF_MU_W  = OFF_BN2_B + N_H2;
  localparam int unsigned OFF_MU_B  = OFF_MU_W  + N_LAT * N_H2;
  localparam int unsigned OFF_LV_W  = OFF_MU_B  + N_LAT;
  localparam int unsigned OFF_LV_B  = OFF_LV_W  + N_LAT * N_H2;
  localparam int unsigned OFF_THR   = OFF_LV_B  + N_LAT;  // 3 bytes, little endian
  localparam int unsigned N_COEFF   = OFF_THR + SCORE_W / 8;  // 2699
  localparam int unsigned CFG_AW    = $clog2(N_COEFF);

  // Clock cycles from an event at the top's input to its score and decision:
  // BN 1 + dense 2 + BN 1 + LReLU 1 + dense 2 + BN 1 + LReLU 1 + heads 2 + KL 2 + decision 1.
  localparam int unsigned LATENCY = 14;

endpackage
