// ae_vae_encoder_top -- real-time anomaly detector: the encoder of a dense
// variational autoencoder followed by its KL-divergence score.
//
// Every clock cycle one collision event enters as 19 objects (4 muons,
// 4 electrons, 10 jets, missing transverse energy) x (pT, eta, phi).  The
// event is flattened to 57 features and pushed through a fully unrolled
// pipeline:
//
//   batchnorm(57) -> dense 57x32 -> batchnorm -> leaky ReLU
//                 -> dense 32x16 -> batchnorm -> leaky ReLU
//                 -> { dense 16x3 -> mu ; dense 16x3 -> log sigma^2 }
//                 -> KL divergence score -> score > threshold -> accept
//
// An event the network encodes far from the unit Gaussian it was trained to
// map background onto gets a large score and is accepted.  The decoder is not
// built: the score needs only the encoder.  Layer sizes, the leaky ReLU, the
// batch normalizations, the latent size and the 8-bit word follow the
// published model; number formats, pipeline cut points, run-time loadable
// coefficients and the configuration port are this design's choices.
//
// Ports:  objects[o][f] -- raw input, feature f (0 pT, 1 eta, 2 phi) of object
//         o (0-3 muons, 4-7 electrons, 8-17 jets, 18 MET; MET eta is 0), flat
//         feature index 3*o + f.  in_valid marks an event.
//         cfg_*  -- byte-wide coefficient load / read-back (map in ae_pkg).
//         out_valid, score, accept, mu, log_var -- result of the event that
//         entered LATENCY (14) cycles earlier.
// Timing: initiation interval 1 cycle, fixed latency 14 cycles (70 ns at
// 200 MHz); no back-pressure.
module ae_vae_encoder_top
  import ae_pkg::*;
(
  input  logic                 clk,
  input  logic                 rst_n,
  // event stream
  input  logic                 in_valid,
  input  raw_t                 objects [N_OBJ][N_FEAT],
  output logic                 out_valid,
  output score_t               score,
  output logic                 accept,
  output act_t                 mu      [N_LAT],
  output act_t                 log_var [N_LAT],
  // coefficient configuration
  input  logic                 cfg_we,
  input  logic [CFG_AW-1:0]    cfg_addr,
  input  logic [7:0]           cfg_wdata,
  output logic [7:0]           cfg_rdata
);

  // ---------------------------------------------------------------- coefficients
  logic [7:0] coeff [N_COEFF];

  ae_coeff_regs #(.N_BYTES(N_COEFF), .AW(CFG_AW)) u_coeff (
    .clk, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .coeff);

  wgt_t   bn0_s [N_IN];   act_t bn0_b [N_IN];
  wgt_t   d1_w  [N_H1][N_IN];  act_t d1_b [N_H1];
  wgt_t   bn1_s [N_H1];   act_t bn1_b [N_H1];
  wgt_t   d2_w  [N_H2][N_H1];  act_t d2_b [N_H2];
  wgt_t   bn2_s [N_H2];   act_t bn2_b [N_H2];
  wgt_t   mu_w  [N_LAT][N_H2]; act_t mu_b [N_LAT];
  wgt_t   lv_w  [N_LAT][N_H2]; act_t lv_b [N_LAT];
  score_t threshold;

  always_comb begin
    for (int i = 0; i < N_IN; i++) begin
      bn0_s[i] = wgt_t'(coeff[OFF_BN0_S + i]);
      bn0_b[i] = act_t'(coeff[OFF_BN0_B + i]);
    end
    for (int j = 0; j < N_H1; j++) begin
      for (int i = 0; i < N_IN; i++) d1_w[j][i] = wgt_t'(coeff[OFF_D1_W + j * N_IN + i]);
      d1_b[j]  = act_t'(coeff[OFF_D1_B + j]);
      bn1_s[j] = wgt_t'(coeff[OFF_BN1_S + j]);
      bn1_b[j] = act_t'(coeff[OFF_BN1_B + j]);
    end
    for (int j = 0; j < N_H2; j++) begin
      for (int i = 0; i < N_H1; i++) d2_w[j][i] = wgt_t'(coeff[OFF_D2_W + j * N_H1 + i]);
      d2_b[j]  = act_t'(coeff[OFF_D2_B + j]);
      bn2_s[j] = wgt_t'(coeff[OFF_BN2_S + j]);
      bn2_b[j] = act_t'(coeff[OFF_BN2_B + j]);
    end
    for (int j = 0; j < N_LAT; j++) begin
      for (int i = 0; i < N_H2; i++) begin
        mu_w[j][i] = wgt_t'(coeff[OFF_MU_W + j * N_H2 + i]);
        lv_w[j][i] = wgt_t'(coeff[OFF_LV_W + j * N_H2 + i]);
      end
      mu_b[j] = act_t'(coeff[OFF_MU_B + j]);
      lv_b[j] = act_t'(coeff[OFF_LV_B + j]);
    end
    threshold = {coeff[OFF_THR + 2], coeff[OFF_THR + 1], coeff[OFF_THR]};
  end

  // ---------------------------------------------------------------- flatten
  raw_t x0 [N_IN];

  always_comb begin
    for (int o = 0; o < N_OBJ; o++)
      for (int f = 0; f < N_FEAT; f++)
        x0[o * N_FEAT + f] = objects[o][f];
  end

  // ---------------------------------------------------------------- input BN
  logic v_bn0;
  act_t a_bn0 [N_IN];

  ae_batchnorm #(.N(N_IN), .IN_W(IN_W), .IN_FRAC(IN_FRAC), .S_W(W_W), .S_FRAC(BN0_S_FRAC),
                 .OUT_W(A_W), .OUT_FRAC(A_FRAC)) u_bn0 (
    .clk, .rst_n, .in_valid, .x(x0), .scale(bn0_s), .shift(bn0_b),
    .out_valid(v_bn0), .y(a_bn0));

  // ---------------------------------------------------------------- hidden layer 1
  logic v_d1, v_bn1, v_lr1;
  act_t a_d1 [N_H1], a_bn1 [N_H1], a_lr1 [N_H1];

  ae_dense #(.N_IN(N_IN), .N_OUT(N_H1), .X_W(A_W), .W_W(W_W), .W_FRAC(W_FRAC)) u_d1 (
    .clk, .rst_n, .in_valid(v_bn0), .x(a_bn0), .w(d1_w), .b(d1_b), .out_valid(v_d1), .y(a_d1));

  ae_batchnorm #(.N(N_H1), .IN_W(A_W), .IN_FRAC(A_FRAC), .S_W(W_W), .S_FRAC(BNH_S_FRAC),
                 .OUT_W(A_W), .OUT_FRAC(A_FRAC)) u_bn1 (
    .clk, .rst_n, .in_valid(v_d1), .x(a_d1), .scale(bn1_s), .shift(bn1_b),
    .out_valid(v_bn1), .y(a_bn1));

  ae_leaky_relu #(.N(N_H1), .W(A_W), .ALPHA(LRELU_ALPHA), .ALPHA_FRAC(LRELU_FRAC)) u_lr1 (
    .clk, .rst_n, .in_valid(v_bn1), .x(a_bn1), .out_valid(v_lr1), .y(a_lr1));

  // ---------------------------------------------------------------- hidden layer 2
  logic v_d2, v_bn2, v_lr2;
  act_t a_d2 [N_H2], a_bn2 [N_H2], a_lr2 [N_H2];

  ae_dense #(.N_IN(N_H1), .N_OUT(N_H2), .X_W(A_W), .W_W(W_W), .W_FRAC(W_FRAC)) u_d2 (
    .clk, .rst_n, .in_valid(v_lr1), .x(a_lr1), .w(d2_w), .b(d2_b), .out_valid(v_d2), .y(a_d2));

  ae_batchnorm #(.N(N_H2), .IN_W(A_W), .IN_FRAC(A_FRAC), .S_W(W_W), .S_FRAC(BNH_S_FRAC),
                 .OUT_W(A_W), .OUT_FRAC(A_FRAC)) u_bn2 (
    .clk, .rst_n, .in_valid(v_d2), .x(a_d2), .scale(bn2_s), .shift(bn2_b),
    .out_valid(v_bn2), .y(a_bn2));

  ae_leaky_relu #(.N(N_H2), .W(A_W), .ALPHA(LRELU_ALPHA), .ALPHA_FRAC(LRELU_FRAC)) u_lr2 (
    .clk, .rst_n, .in_valid(v_bn2), .x(a_bn2), .out_valid(v_lr2), .y(a_lr2));

  // ---------------------------------------------------------------- latent space
  logic v_lat;
  act_t lat_mu [N_LAT], lat_lv [N_LAT];

  ae_latent_heads #(.N_IN(N_H2), .N_LAT(N_LAT), .X_W(A_W), .W_W(W_W), .W_FRAC(W_FRAC)) u_lat (
    .clk, .rst_n, .in_valid(v_lr2), .x(a_lr2), .w_mu(mu_w), .b_mu(mu_b), .w_lv(lv_w), .b_lv(lv_b),
    .out_valid(v_lat), .mu(lat_mu), .log_var(lat_lv));

  // ---------------------------------------------------------------- score
  logic   v_kl;
  score_t kl_score;

  ae_kl_divergence #(.N_LAT(N_LAT), .X_W(A_W), .X_FRAC(A_FRAC), .EXP_W(EXP_W), .SCORE_W(SCORE_W)) u_kl (
    .clk, .rst_n, .in_valid(v_lat), .mu(lat_mu), .log_var(lat_lv), .out_valid(v_kl), .score(kl_score));

  ae_trigger_decision #(.SCORE_W(SCORE_W)) u_dec (
    .clk, .rst_n, .in_valid(v_kl), .score(kl_score), .threshold,
    .out_valid, .score_out(score), .accept);

  // latent values delayed to line up with the score (KL 2 + decision 1 cycles)
  act_t mu_q [3][N_LAT], lv_q [3][N_LAT];

  always_ff @(posedge clk) begin
    mu_q[0] <= lat_mu;
    lv_q[0] <= lat_lv;
    for (int s = 1; s < 3; s++) begin
      mu_q[s] <= mu_q[s-1];
      lv_q[s] <= lv_q[s-1];
    end
  end

  assign mu      = mu_q[2];
  assign log_var = lv_q[2];

  // the pipeline has a fixed latency: every event comes out LATENCY cycles
  // after it went in (checked in simulation once the history is filled)
  logic [LATENCY-1:0]         vld_hist;
  localparam int unsigned CW = $clog2(LATENCY + 1);
  logic [CW-1:0]              since_rst;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      vld_hist  <= '0;
      since_rst <= '0;
    end else begin
      vld_hist <= {vld_hist[LATENCY-2:0], in_valid};
      if (since_rst != CW'(LATENCY)) since_rst <= since_rst + 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && since_rst == CW'(LATENCY))
      assert (out_valid == vld_hist[LATENCY-1])
        else $error("ae_vae_encoder_top: output valid does not follow input by %0d cycles", LATENCY);
  end

endmodule
