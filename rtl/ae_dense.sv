// ae_dense -- fully parallel fully-connected layer.
//
// y[j] = sat( (sum_i w[j][i] * x[i] + b[j] * 2**W_FRAC) >> W_FRAC ) for
// j = 0 .. N_OUT-1.  Every weight has its own multiplier, so the layer takes a
// new input vector every clock cycle (initiation interval of one), as in the
// per-layer, fully unrolled implementation of the published encoder.  Weights
// and biases are inputs, driven from the coefficient register file, because
// trained values are loaded at run time; a pruned connection is a zero weight.
//
// Formats: x and b have X_FRAC fraction bits, w has W_FRAC, y has X_FRAC
// (truncated toward minus infinity, saturated to X_W bits).
// Timing: two registered stages -- the N_OUT x N_IN products, then the adder
// tree with bias and requantization.  out_valid follows in_valid by 2 cycles.
module ae_dense #(
  parameter int unsigned N_IN   = 57,
  parameter int unsigned N_OUT  = 32,
  parameter int unsigned X_W    = 8,
  parameter int unsigned W_W    = 8,
  parameter int unsigned W_FRAC = 6
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  in_valid,
  input  logic signed [X_W-1:0] x [N_IN],
  input  logic signed [W_W-1:0] w [N_OUT][N_IN],
  input  logic signed [X_W-1:0] b [N_OUT],
  output logic                  out_valid,
  output logic signed [X_W-1:0] y [N_OUT]
);
  localparam int unsigned PW   = X_W + W_W;
  localparam int unsigned AW   = PW + $clog2(N_IN + 1) + 1;
  localparam logic signed [AW-1:0] YMAX = AW'((1 <<< (X_W - 1)) - 1);
  localparam logic signed [AW-1:0] YMIN = -AW'(1 <<< (X_W - 1));

  // stage 1: products (the bias is registered alongside so that it belongs to
  // the same vector even if the coefficients change between cycles)
  logic signed [PW-1:0]  prod [N_OUT][N_IN];
  logic signed [X_W-1:0] b1   [N_OUT];
  logic                  v1;

  always_ff @(posedge clk) begin
    for (int j = 0; j < N_OUT; j++)
      for (int i = 0; i < N_IN; i++)
        prod[j][i] <= PW'(x[i]) * PW'(w[j][i]);
    b1 <= b;
    if (!rst_n) v1 <= 1'b0;
    else        v1 <= in_valid;
  end

  // stage 2: accumulate, add bias, requantize
  logic signed [X_W-1:0] y_d [N_OUT];

  always_comb begin
    for (int j = 0; j < N_OUT; j++) begin
      logic signed [AW-1:0] acc;
      acc = AW'(b1[j]) <<< W_FRAC;
      for (int i = 0; i < N_IN; i++)
        acc = acc + AW'(prod[j][i]);
      acc = acc >>> W_FRAC;
      if (acc > YMAX)      y_d[j] = YMAX[X_W-1:0];
      else if (acc < YMIN) y_d[j] = YMIN[X_W-1:0];
      else                 y_d[j] = acc[X_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    y <= y_d;
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= v1;
  end

endmodule
