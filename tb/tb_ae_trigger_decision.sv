// tb_ae_trigger_decision -- self-checking test of ae_trigger_decision.
// Random scores against random thresholds, plus scores equal to, one above
// and one below the threshold; accept must be score > threshold for valid
// events only, one cycle later.
module tb_ae_trigger_decision;
  localparam int SW = 24, NVEC = 500;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, accept;
  logic [SW-1:0] score, threshold, score_out;
  int checks = 0, failures = 0, cyc = 0, first_in_cyc = -1, first_out_cyc = -1;
  logic e_acc [NVEC];
  logic [SW-1:0] e_sc [NVEC];
  int wr_ptr = 0, rd_ptr = 0, n_acc = 0, n_rej = 0;

  ae_trigger_decision #(.SCORE_W(SW)) dut (.*);

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
      checks += 2;
      if (accept != e_acc[rd_ptr] || score_out != e_sc[rd_ptr]) begin
        failures++;
        if (failures < 10) $display("mismatch %0d: accept %0b exp %0b", rd_ptr, accept, e_acc[rd_ptr]);
      end
      if (e_acc[rd_ptr]) n_acc++; else n_rej++;
      rd_ptr++;
    end else begin
      checks++;
      if (accept) begin failures++; $display("accept without valid event"); end
    end
  end

  initial begin
    score = 0; threshold = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int v = 0; v < NVEC; v++) begin
      automatic logic [SW-1:0] t = SW'($urandom);
      automatic logic [SW-1:0] s;
      automatic logic vld = (v % 9 != 4);
      case (v % 4)
        0: s = t;
        1: s = t + 1;
        2: s = t - 1;
        default: s = SW'($urandom);
      endcase
      score <= s;
      threshold <= t;
      in_valid <= vld;
      if (vld) begin
        e_acc[wr_ptr] = (s > t);
        e_sc[wr_ptr] = s;
        wr_ptr++;
      end
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (rd_ptr != wr_ptr) begin failures++; $display("count mismatch"); end
    checks++;
    if (first_out_cyc - first_in_cyc != 1) begin failures++; $display("latency %0d", first_out_cyc - first_in_cyc); end
    checks++;
    if (n_acc == 0 || n_rej == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
