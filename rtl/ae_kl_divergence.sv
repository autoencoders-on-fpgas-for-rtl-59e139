// ae_kl_divergence -- Kullback-Leibler anomaly score of the latent Gaussian.
//
// score = 1/2 * sum_i ( mu_i^2 + exp(lv_i) - lv_i - 1 ),  lv_i = log(sigma_i^2),
// which is the KL divergence between N(mu, sigma^2) and the unit Gaussian, the
// regularisation term of the VAE loss.  Used as the anomaly score it needs
// only the encoder: no decoder, no random sampling, no buffered input copy.
//
// How it is computed is this design's choice.  exp() is a 2**X_W entry table
// indexed by the raw log-variance code and filled at elaboration; entries have
// 2*X_FRAC fraction bits (the same as mu^2) and saturate at EXP_W bits.  Each
// per-dimension term is mathematically >= 0; truncation can make it slightly
// negative, so it is clamped at 0.  The score is unsigned with 2*X_FRAC
// fraction bits; the 1/2 is a right shift (truncating).
//
// Timing: two registered stages (squares and table read, then the sum).
module ae_kl_divergence #(
  parameter int unsigned N_LAT   = 3,
  parameter int unsigned X_W     = 8,
  parameter int unsigned X_FRAC  = 4,
  parameter int unsigned EXP_W   = 20,
  parameter int unsigned SCORE_W = 24
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [X_W-1:0]    mu      [N_LAT],
  input  logic signed [X_W-1:0]    log_var [N_LAT],
  output logic                     out_valid,
  output logic [SCORE_W-1:0]       score
);
  localparam int unsigned TAB_N = 2 ** X_W;
  localparam int unsigned SQ_W  = 2 * X_W;
  localparam int unsigned TW    = SCORE_W + 2;  // signed term / sum width

  typedef logic [EXP_W-1:0] exp_tab_t [TAB_N];

  // exp_tab[code] = floor(exp(code_as_signed / 2**X_FRAC) * 2**(2*X_FRAC))
  function automatic exp_tab_t make_exp_tab();
    exp_tab_t t;
    for (int k = 0; k < TAB_N; k++) begin
      int  v;
      real r;
      v = (k >= TAB_N / 2) ? k - TAB_N : k;
      r = $exp(real'(v) / real'(2 ** X_FRAC)) * real'(2 ** (2 * X_FRAC));
      if (r >= real'(2 ** EXP_W) - 1.0) t[k] = '1;
      else                                t[k] = EXP_W'($rtoi(r));
    end
    return t;
  endfunction

  localparam exp_tab_t EXP_TAB = make_exp_tab();

  // stage 1: mu^2 and exp(lv)
  logic [SQ_W-1:0]          mu_sq [N_LAT];
  logic [EXP_W-1:0]         ex    [N_LAT];
  logic signed [X_W-1:0]    lv1   [N_LAT];
  logic                     v1;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N_LAT; i++) begin
      mu_sq[i] <= SQ_W'(mu[i] * mu[i]);
      ex[i]    <= EXP_TAB[log_var[i]];
      lv1[i]   <= log_var[i];
    end
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end

  // stage 2: terms, clamp, sum, halve
  logic [SCORE_W-1:0] score_d;

  always_comb begin
    logic signed [TW-1:0] sum;
    sum = '0;
    for (int i = 0; i < N_LAT; i++) begin
      logic signed [TW-1:0] term;
      term = $signed(TW'(mu_sq[i])) + $signed(TW'(ex[i]))
           - (TW'(lv1[i]) <<< X_FRAC) - $signed(TW'(1) <<< (2 * X_FRAC));
      if (term < 0) term = '0;
      sum = sum + term;
    end
    sum = sum >>> 1;
    score_d = (sum > $signed(TW'({SCORE_W{1'b1}}))) ? '1 : sum[SCORE_W-1:0];
  end

  always_ff @(posedge clk) begin
    score <= score_d;
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;
  end

endmodule
