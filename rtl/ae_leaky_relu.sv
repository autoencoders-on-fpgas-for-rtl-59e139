// ae_leaky_relu -- element-wise leaky ReLU activation.
//
// y[k] = x[k] for x[k] >= 0 and alpha * x[k] otherwise, with
// alpha = ALPHA / 2**ALPHA_FRAC.  The network activates both hidden layers
// with a leaky ReLU as the published model does; the slope is not published,
// so the default is the common library default of 0.3 (77/256).  The negative
// branch is truncated toward minus infinity, so it never returns a positive
// value and a small negative input gives -1 LSB rather than 0.
//
// Interface: arrays of N signed W-bit values.  Timing: one registered stage.
module ae_leaky_relu #(
  parameter int unsigned N          = 32,
  parameter int unsigned W          = 8,
  parameter int unsigned ALPHA      = 77,
  parameter int unsigned ALPHA_FRAC = 8
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic signed [W-1:0] x [N],
  output logic                out_valid,
  output logic signed [W-1:0] y [N]
);
  localparam int unsigned PW = W + ALPHA_FRAC + 2;

  logic signed [W-1:0] y_d [N];

  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic signed [PW-1:0] p;
      p = PW'(x[k]) * $signed(PW'(ALPHA));
      p = p >>> ALPHA_FRAC;
      y_d[k] = x[k][W-1] ? p[W-1:0] : x[k];
    end
  end

  always_ff @(posedge clk) begin
    y <= y_d;
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
