// tb_ae_kl_divergence -- self-checking test of ae_kl_divergence.
// First a sweep over every log-variance code (with mu = 0, so the score is the
// exponential table term alone), then random (mu, log_var) triples.  Scores
// are compared with a reference computed with the real-valued exp() and
// integer arithmetic; the two-cycle latency and the all-zero-input score
// (KL of the unit Gaussian = 0) are checked.
module tb_ae_kl_divergence;
  import ae_ref_pkg::*;

  localparam int N_LAT = 3, FRAC = 4, EXP_W = 20, SCORE_W = 24;
  localparam int NVEC = 256 + 600;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0] mu [N_LAT], log_var [N_LAT];
  logic [SCORE_W-1:0] score;
  int checks = 0, failures = 0, cyc = 0, first_in_cyc = -1, first_out_cyc = -1;
  longint e_sc [NVEC];
  int wr_ptr = 0, rd_ptr = 0, zero_seen = 0, big_seen = 0;

  ae_kl_divergence #(.N_LAT(N_LAT), .X_W(8), .X_FRAC(FRAC), .EXP_W(EXP_W), .SCORE_W(SCORE_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    if (in_valid && first_in_cyc < 0) first_in_cyc = cyc;
    if (out_valid) begin
      if (first_out_cyc < 0) first_out_cyc = cyc;
      checks++;
      if (longint'(score) != e_sc[rd_ptr]) begin
        failures++;
        if (failures < 10) $display("mismatch vec %0d: got %0d exp %0d", rd_ptr, score, e_sc[rd_ptr]);
      end
      if (e_sc[rd_ptr] == 0) zero_seen++;
      if (e_sc[rd_ptr] > 100000) big_seen++;
      rd_ptr++;
    end
  end

  task automatic put(longint m[], longint l[]);
    for (int j = 0; j < N_LAT; j++) begin
      mu[j] <= 8'(m[j]);
      log_var[j] <= 8'(l[j]);
    end
    e_sc[wr_ptr] = ref_kl(m, l, FRAC, EXP_W, SCORE_W);
    wr_ptr++;
    in_valid <= 1;
    @(posedge clk);
  endtask

  initial begin
    for (int j = 0; j < N_LAT; j++) begin mu[j] = 0; log_var[j] = 0; end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int k = 0; k < 256; k++) begin
      automatic longint m [] = new [N_LAT];
      automatic longint l [] = new [N_LAT];
      for (int j = 0; j < N_LAT; j++) begin
        m[j] = 0;
        l[j] = (j == 0) ? longint'($signed(8'(k))) : 0;
      end
      put(m, l);
    end
    for (int v = 0; v < 600; v++) begin
      automatic longint m [] = new [N_LAT];
      automatic longint l [] = new [N_LAT];
      for (int j = 0; j < N_LAT; j++) begin
        m[j] = longint'($signed(8'($urandom)));
        l[j] = longint'($signed(8'($urandom)));
      end
      put(m, l);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (rd_ptr != wr_ptr) begin failures++; $display("count mismatch %0d %0d", rd_ptr, wr_ptr); end
    checks++;
    if (first_out_cyc - first_in_cyc != 2) begin failures++; $display("latency %0d", first_out_cyc - first_in_cyc); end
    checks++;
    if (e_sc[0] != 0) begin failures++; $display("KL of unit Gaussian not 0"); end
    checks++;
    if (zero_seen == 0 || big_seen == 0) begin failures++; $display("range not exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
