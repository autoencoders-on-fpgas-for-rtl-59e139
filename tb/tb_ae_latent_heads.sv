// tb_ae_latent_heads -- self-checking test of ae_latent_heads (16 -> 3 + 3).
// Random activations and different random weights for the two heads are
// streamed back to back; mu and log_var are compared with two independent
// reference dot products, and the two-cycle latency is checked.
module tb_ae_latent_heads;
  import ae_ref_pkg::*;

  localparam int N_IN = 16, N_LAT = 3, W_FRAC = 6, NVEC = 200;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic signed [7:0] x [N_IN], w_mu [N_LAT][N_IN], w_lv [N_LAT][N_IN];
  logic signed [7:0] b_mu [N_LAT], b_lv [N_LAT], mu [N_LAT], log_var [N_LAT];
  int checks = 0, failures = 0, cyc = 0, first_in_cyc = -1, first_out_cyc = -1;
  longint e_mu [NVEC][N_LAT], e_lv [NVEC][N_LAT];
  int wr_ptr = 0, rd_ptr = 0;

  ae_latent_heads #(.N_IN(N_IN), .N_LAT(N_LAT), .X_W(8), .W_W(8), .W_FRAC(W_FRAC)) dut (.*);

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
      for (int j = 0; j < N_LAT; j++) begin
        checks += 2;
        if (longint'(mu[j]) != e_mu[rd_ptr][j] || longint'(log_var[j]) != e_lv[rd_ptr][j]) begin
          failures++;
          if (failures < 10) $display("mismatch vec %0d j %0d: mu %0d/%0d lv %0d/%0d", rd_ptr, j,
                                      mu[j], e_mu[rd_ptr][j], log_var[j], e_lv[rd_ptr][j]);
        end
      end
      rd_ptr++;
    end
  end

  initial begin
    for (int i = 0; i < N_IN; i++) x[i] = 0;
    for (int j = 0; j < N_LAT; j++) begin
      b_mu[j] = 0; b_lv[j] = 0;
      for (int i = 0; i < N_IN; i++) begin w_mu[j][i] = 0; w_lv[j][i] = 0; end
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int v = 0; v < NVEC; v++) begin
      automatic longint xv [] = new [N_IN];
      for (int i = 0; i < N_IN; i++) begin
        xv[i] = longint'($signed(8'($urandom)));
        x[i] <= 8'(xv[i]);
      end
      for (int j = 0; j < N_LAT; j++) begin
        automatic longint wm [] = new [N_IN];
        automatic longint wl [] = new [N_IN];
        automatic longint bm = longint'($signed(8'($urandom)));
        automatic longint bl = longint'($signed(8'($urandom)));
        for (int i = 0; i < N_IN; i++) begin
          wm[i] = longint'($signed(8'($urandom % 64))) - 32;
          wl[i] = longint'($signed(8'($urandom % 64))) - 32;
          w_mu[j][i] <= 8'(wm[i]);
          w_lv[j][i] <= 8'(wl[i]);
        end
        b_mu[j] <= 8'(bm);
        b_lv[j] <= 8'(bl);
        e_mu[wr_ptr][j] = ref_dense_dot(xv, wm, bm, W_FRAC, 8);
        e_lv[wr_ptr][j] = ref_dense_dot(xv, wl, bl, W_FRAC, 8);
      end
      in_valid <= 1;
      wr_ptr++;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (rd_ptr != wr_ptr) begin failures++; $display("count mismatch %0d %0d", rd_ptr, wr_ptr); end
    checks++;
    if (first_out_cyc - first_in_cyc != 2) begin failures++; $display("latency %0d", first_out_cyc - first_in_cyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
