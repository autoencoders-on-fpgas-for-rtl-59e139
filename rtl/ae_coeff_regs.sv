// ae_coeff_regs -- on-chip coefficient register file.
//
// Holds every weight, bias, batch-normalization constant and the trigger
// threshold of the encoder as one byte each, all visible at once on the coeff
// output so that the fully parallel layers can read them every cycle.  The
// published model keeps its coefficients on chip as synthesis constants; this
// design loads them at run time instead, through a byte-wide write port, with
// a registered read-back for verification.  The address map is in ae_pkg.
//
// Timing: a write with cfg_we high is visible on coeff the next cycle;
// cfg_rdata shows the byte at cfg_addr one cycle later.  Addresses at or above
// N_BYTES are ignored on write and read as 0.  No reset: software must load
// all coefficients before sending events.
module ae_coeff_regs #(
  parameter int unsigned N_BYTES = 2699,
  parameter int unsigned AW      = 12
) (
  input  logic          clk,
  input  logic          cfg_we,
  input  logic [AW-1:0] cfg_addr,
  input  logic [7:0]    cfg_wdata,
  output logic [7:0]    cfg_rdata,
  output logic [7:0]    coeff [N_BYTES]
);
  initial begin
    assert (2 ** AW >= N_BYTES) else $error("ae_coeff_regs: address too narrow");
  end

  always_ff @(posedge clk) begin
    if (cfg_we && 32'(cfg_addr) < N_BYTES)
      coeff[cfg_addr] <= cfg_wdata;
    cfg_rdata <= (32'(cfg_addr) < N_BYTES) ? coeff[cfg_addr] : 8'h00;
  end

endmodule
