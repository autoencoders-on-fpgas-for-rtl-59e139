// tb_ae_batchnorm -- self-checking test of ae_batchnorm at the input-layer
// configuration (57 features, 16-bit raw inputs, 8-bit output).
// Random inputs, scales and shifts, plus directed saturation cases, are
// streamed one vector per cycle; each output is compared with the reference
// model one cycle later, and the one-cycle latency is checked.
module tb_ae_batchnorm;
  import ae_ref_pkg::*;

  localparam int N = 57, IN_W = 16, IN_FRAC = 2, S_FRAC = 8, OUT_W = 8, OUT_FRAC = 4;
  localparam int NVEC = 400;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [IN_W-1:0]  x [N];
  logic signed [7:0]       scale [N];
  logic signed [OUT_W-1:0] shift [N], y [N];
  int checks = 0, failures = 0;
  longint exp_mem [NVEC][N];
  int wr_ptr = 0, rd_ptr = 0;
  int sat_hi = 0, sat_lo = 0;

  ae_batchnorm #(.N(N), .IN_W(IN_W), .IN_FRAC(IN_FRAC), .S_W(8), .S_FRAC(S_FRAC),
                 .OUT_W(OUT_W), .OUT_FRAC(OUT_FRAC)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: compare against queue of expected vectors
  int in_cnt = 0, out_cnt = 0, first_in_cyc = -1, first_out_cyc = -1, cyc = 0;
  // sample at the falling edge, away from the rising edge the DUT uses
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    if (in_valid && first_in_cyc < 0) first_in_cyc = cyc;
    if (out_valid) begin
      if (first_out_cyc < 0) first_out_cyc = cyc;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (longint'(y[k]) != exp_mem[rd_ptr][k]) begin
          failures++;
          if (failures < 10) $display("mismatch vec %0d k %0d: got %0d exp %0d", out_cnt, k, y[k], exp_mem[rd_ptr][k]);
        end
        if (exp_mem[rd_ptr][k] == 127) sat_hi++;
        if (exp_mem[rd_ptr][k] == -128) sat_lo++;
      end
      rd_ptr++;
      out_cnt++;
    end
  end

  initial begin
    for (int k = 0; k < N; k++) begin x[k] = 0; scale[k] = 0; shift[k] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int v = 0; v < NVEC; v++) begin
      automatic logic vld = (v % 7 != 3);  // some bubbles
      for (int k = 0; k < N; k++) begin
        automatic logic signed [IN_W-1:0] xv =
          (v % 4 == 0) ? IN_W'($urandom) : IN_W'($signed(10'($urandom)));
        automatic logic signed [7:0] sv = 8'($urandom);
        automatic logic signed [7:0] bv = 8'($urandom);
        x[k]     <= xv;
        scale[k] <= sv;
        shift[k] <= bv;
        if (vld) exp_mem[wr_ptr][k] = ref_bn(longint'(xv), longint'(sv), longint'(bv),
                                             IN_FRAC, S_FRAC, OUT_FRAC, OUT_W);
      end
      in_valid <= vld;
      if (vld) begin
        wr_ptr++;
        in_cnt++;
      end
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (out_cnt != in_cnt) begin failures++; $display("count mismatch %0d %0d", out_cnt, in_cnt); end
    checks++;
    if (first_out_cyc - first_in_cyc != 1) begin
      failures++; $display("latency %0d, expected 1", first_out_cyc - first_in_cyc);
    end
    checks++;
    if (sat_hi == 0 || sat_lo == 0) begin failures++; $display("saturation not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
