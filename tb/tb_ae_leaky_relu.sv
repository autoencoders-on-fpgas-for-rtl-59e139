// tb_ae_leaky_relu -- exhaustive test of ae_leaky_relu: all 256 8-bit codes
// are applied (16 per cycle) and compared with the reference activation;
// latency of one cycle is checked.
module tb_ae_leaky_relu;
  import ae_ref_pkg::*;

  localparam int N = 16, ALPHA = 77, AF = 8;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0] x [N], y [N];
  int checks = 0, failures = 0, cyc = 0, first_in_cyc = -1, first_out_cyc = -1;
  longint exp_mem [16][N];
  int wr_ptr = 0, rd_ptr = 0, neg_seen = 0;

  ae_leaky_relu #(.N(N), .W(8), .ALPHA(ALPHA), .ALPHA_FRAC(AF)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (1000) @(posedge clk);
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
      if (first_out_cyc < 0) first_out_cyc = cyc;
      for (int k = 0; k < N; k++) begin
        checks++;
        if (longint'(y[k]) != exp_mem[rd_ptr][k]) begin
          failures++;
          if (failures < 10) $display("mismatch: got %0d exp %0d", y[k], exp_mem[rd_ptr][k]);
        end
        if (exp_mem[rd_ptr][k] < 0) neg_seen++;
      end
      rd_ptr++;
    end
  end

  initial begin
    for (int k = 0; k < N; k++) x[k] = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int v = 0; v < 16; v++) begin
      for (int k = 0; k < N; k++) begin
        automatic longint xv = longint'($signed(8'(v * N + k)));
        x[k] <= 8'(xv);
        exp_mem[v][k] = ref_lrelu(xv, ALPHA, AF);
      end
      in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    checks++;
    if (rd_ptr != 16) begin failures++; $display("count %0d", rd_ptr); end
    checks++;
    if (first_out_cyc - first_in_cyc != 1) begin failures++; $display("latency %0d", first_out_cyc - first_in_cyc); end
    checks++;
    if (neg_seen == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
