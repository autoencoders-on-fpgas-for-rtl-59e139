// tb_ae_dense -- self-checking test of ae_dense at the first hidden layer's
// size (57 inputs, 32 outputs).  Random activations, weights (about half of
// them zero, as in a pruned layer) and biases are streamed one vector per
// cycle with occasional bubbles; every output is compared with the reference
// dot product, and the two-cycle latency and one-cycle initiation interval are
// checked.  Large weights force both saturation limits.
module tb_ae_dense;
  import ae_ref_pkg::*;

  localparam int N_IN = 57, N_OUT = 32, W_FRAC = 6;
  localparam int NVEC = 150;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0] x [N_IN], w [N_OUT][N_IN], b [N_OUT], y [N_OUT];
  int checks = 0, failures = 0;
  longint exp_mem [NVEC][N_OUT];
  int wr_ptr = 0, rd_ptr = 0, sat_hi = 0, sat_lo = 0, mid = 0;
  int cyc = 0, first_in_cyc = -1, first_out_cyc = -1, max_run = 0, run = 0;

  ae_dense #(.N_IN(N_IN), .N_OUT(N_OUT), .X_W(8), .W_W(8), .W_FRAC(W_FRAC)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // sample at the falling edge, away from the rising edge the DUT uses
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    if (in_valid && first_in_cyc < 0) first_in_cyc = cyc;
    if (out_valid) begin
      run++;
      if (run > max_run) max_run = run;
      if (first_out_cyc < 0) first_out_cyc = cyc;
      for (int j = 0; j < N_OUT; j++) begin
        checks++;
        if (longint'(y[j]) != exp_mem[rd_ptr][j]) begin
          failures++;
          if (failures < 10) $display("mismatch vec %0d j %0d: got %0d exp %0d", rd_ptr, j, y[j], exp_mem[rd_ptr][j]);
        end
        if (exp_mem[rd_ptr][j] == 127) sat_hi++;
        else if (exp_mem[rd_ptr][j] == -128) sat_lo++;
        else mid++;
      end
      rd_ptr++;
    end else run = 0;
  end

  initial begin
    for (int i = 0; i < N_IN; i++) x[i] = 0;
    for (int j = 0; j < N_OUT; j++) begin
      b[j] = 0;
      for (int i = 0; i < N_IN; i++) w[j][i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int v = 0; v < NVEC; v++) begin
      automatic logic vld = (v % 11 != 5);
      automatic longint xv [] = new [N_IN];
      automatic int wmag = (v % 5 == 0) ? 256 : 16;  // some vectors with large weights
      for (int i = 0; i < N_IN; i++) begin
        xv[i] = longint'($signed(8'($urandom)));
        x[i] <= 8'(xv[i]);
      end
      for (int j = 0; j < N_OUT; j++) begin
        automatic longint wv [] = new [N_IN];
        automatic longint bv = longint'($signed(8'($urandom)));
        for (int i = 0; i < N_IN; i++) begin
          wv[i] = ($urandom % 2 == 0) ? 0 : longint'($signed(8'($urandom % wmag)));
          w[j][i] <= 8'(wv[i]);
        end
        b[j] <= 8'(bv);
        if (vld) exp_mem[wr_ptr][j] = ref_dense_dot(xv, wv, bv, W_FRAC, 8);
      end
      in_valid <= vld;
      if (vld) wr_ptr++;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (rd_ptr != wr_ptr) begin failures++; $display("count mismatch %0d %0d", rd_ptr, wr_ptr); end
    checks++;
    if (first_out_cyc - first_in_cyc != 2) begin
      failures++; $display("latency %0d, expected 2", first_out_cyc - first_in_cyc);
    end
    checks++;
    if (max_run < 5) begin failures++; $display("back-to-back outputs not seen"); end
    checks++;
    if (sat_hi == 0 || sat_lo == 0 || mid == 0) begin failures++; $display("value ranges not exercised %0d %0d %0d", sat_hi, sat_lo, mid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
