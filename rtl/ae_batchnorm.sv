// ae_batchnorm -- inference-time batch normalization of N features.
//
// At inference a batch-normalization layer is an affine map per feature:
// y[k] = x[k] * scale[k] + shift[k], with scale = gamma / sqrt(var + eps) and
// shift = beta - mean * scale folded offline.  The network uses one such layer
// on its raw inputs (in place of any other pre-processing) and one after each
// hidden dense layer, as the published model does.  How the layer is computed
// in fixed point is this design's choice: the product (IN_FRAC + S_FRAC
// fraction bits) is added to the shift aligned to the same point, shifted down
// to OUT_FRAC fraction bits (truncation toward minus infinity) and saturated to
// OUT_W bits.
//
// Interface: x, scale, shift are arrays of N; y is registered.
// Timing: one cycle; out_valid follows in_valid by one cycle; a new vector may
// enter every cycle.
module ae_batchnorm #(
  parameter int unsigned N        = 57,
  parameter int unsigned IN_W     = 16,
  parameter int unsigned IN_FRAC  = 2,
  parameter int unsigned S_W      = 8,
  parameter int unsigned S_FRAC   = 8,
  parameter int unsigned OUT_W    = 8,
  parameter int unsigned OUT_FRAC = 4
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  logic signed [IN_W-1:0]     x     [N],
  input  logic signed [S_W-1:0]      scale [N],
  input  logic signed [OUT_W-1:0]    shift [N],
  output logic                       out_valid,
  output logic signed [OUT_W-1:0]    y     [N]
);
  localparam int unsigned SH   = IN_FRAC + S_FRAC - OUT_FRAC;  // alignment shift
  localparam int unsigned PW   = IN_W + S_W + 1;                // product + shift width
  localparam logic signed [PW-1:0] YMAX = PW'((1 <<< (OUT_W - 1)) - 1);
  localparam logic signed [PW-1:0] YMIN = -PW'(1 <<< (OUT_W - 1));

  initial begin
    assert (IN_FRAC + S_FRAC >= OUT_FRAC)
      else $error("ae_batchnorm: output has more fraction bits than the product");
  end

  logic signed [OUT_W-1:0] y_d [N];

  always_comb begin
    for (int k = 0; k < N; k++) begin
      logic signed [PW-1:0] acc;
      acc = PW'(x[k]) * PW'(scale[k]) + (PW'(shift[k]) <<< SH);
      acc = acc >>> SH;
      if (acc > YMAX)      y_d[k] = YMAX[OUT_W-1:0];
      else if (acc < YMIN) y_d[k] = YMIN[OUT_W-1:0];
      else                 y_d[k] = acc[OUT_W-1:0];
    end
  end

  always_ff @(posedge clk) begin
    y <= y_d;
    if (!rst_n) out_valid <= 1'b0;
    else        out_valid <= in_valid;
  end

endmodule
