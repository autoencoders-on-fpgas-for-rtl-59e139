// ae_latent_heads -- the two latent-space layers of the variational encoder.
//
// Two dense layers read the same N_IN hidden activations: one gives the means
// mu of the N_LAT-dimensional Gaussian that encodes the event, the other its
// log-variances log(sigma^2).  Producing the log-variance, rather than sigma
// itself, is this design's choice: it is the usual VAE parametrisation and the
// divergence score then needs a single exponential table.  Neither head has a
// batch normalization or an activation.
//
// Interface: x in, per-head weights and biases, mu and log_var out.
// Timing: both heads are ae_dense instances (two registered stages) running in
// lock step, so out_valid follows in_valid by 2 cycles.
module ae_latent_heads #(
  parameter int unsigned N_IN   = 16,
  parameter int unsigned N_LAT  = 3,
  parameter int unsigned X_W    = 8,
  parameter int unsigned W_W    = 8,
  parameter int unsigned W_FRAC = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [X_W-1:0] x    [N_IN],
  input  logic signed [W_W-1:0] w_mu [N_LAT][N_IN],
  input  logic signed [X_W-1:0] b_mu [N_LAT],
  input  logic signed [W_W-1:0] w_lv [N_LAT][N_IN],
  input  logic signed [X_W-1:0] b_lv [N_LAT],
  output logic                  out_valid,
  output logic signed [X_W-1:0] mu      [N_LAT],
  output logic signed [X_W-1:0] log_var [N_LAT]
);
  logic v_mu, v_lv;

  ae_dense #(.N_IN(N_IN), .N_OUT(N_LAT), .X_W(X_W), .W_W(W_W), .W_FRAC(W_FRAC)) u_mu (
    .clk, .rst_n, .in_valid, .x, .w(w_mu), .b(b_mu), .out_valid(v_mu), .y(mu));

  ae_dense #(.N_IN(N_IN), .N_OUT(N_LAT), .X_W(X_W), .W_W(W_W), .W_FRAC(W_FRAC)) u_lv (
    .clk, .rst_n, .in_valid, .x, .w(w_lv), .b(b_lv), .out_valid(v_lv), .y(log_var));

  assign out_valid = v_mu;

  // both heads share the valid pipeline
  always_ff @(posedge clk) begin
    if (rst_n) assert (v_mu == v_lv) else $error("ae_latent_heads: heads out of step");
  end

endmodule
