// tb_ae_top -- end-to-end test of ae_vae_encoder_top at its default size.
//
// 1. Loads every coefficient through the byte-wide configuration port: random
//    weights with about half of them zero (as after 50% pruning), random
//    biases and batch-normalization constants, and reads them all back.
// 2. Generates random events of 19 objects (some zero-padded, MET eta = 0),
//    computes each event's score with the bit-exact reference model, and
//    programs the threshold at the median score.
// 3. Streams the events one per cycle (with a few gaps) and compares score,
//    accept, mu and log_var of every event; checks the 14-cycle latency, that
//    it is within the 16 cycles (80 ns at 200 MHz) of the published design,
//    and that back-to-back events come out back to back (II = 1).
// 4. Pauses the stream, lets the pipeline drain, rewrites the threshold (a
//    change of working point) and checks that it applies to later events.
// Mechanisms counted, each must occur: accept, reject, back-to-back events,
// gaps, saturation in a hidden layer, leaky-ReLU negative branch, threshold
// change.
module tb_ae_top;
  import ae_pkg::*;
  import ae_ref_pkg::*;

  localparam int NEV = 300;

  logic clk = 0, rst_n = 0, in_valid = 0, out_valid, accept;
  raw_t objects [N_OBJ][N_FEAT];
  score_t score;
  act_t mu [N_LAT], log_var [N_LAT];
  logic cfg_we = 0;
  logic [CFG_AW-1:0] cfg_addr = '0;
  logic [7:0] cfg_wdata = '0, cfg_rdata;

  ae_vae_encoder_top dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  logic [7:0] cmem [N_COEFF];
  longint ev [NEV][N_IN];
  longint e_score [NEV], e_mu [NEV][N_LAT], e_lv [NEV][N_LAT];
  logic   e_acc [NEV];
  int n_accept = 0, n_reject = 0, n_b2b = 0, n_gap = 0, n_sat = 0, n_lrelu_neg = 0, n_thr_change = 0;

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------- reference model
  task automatic ref_event(input longint x [N_IN], output longint sc,
                           output longint m [N_LAT], output longint l [N_LAT]);
    longint a0 [] = new [N_IN];
    longint h1 [] = new [N_H1];
    longint h2 [] = new [N_H2];
    longint wv [];
    longint mm [] = new [N_LAT];
    longint ll [] = new [N_LAT];
    for (int i = 0; i < N_IN; i++)
      a0[i] = ref_bn(x[i], s8(cmem[OFF_BN0_S + i]), s8(cmem[OFF_BN0_B + i]),
                     IN_FRAC, BN0_S_FRAC, A_FRAC, A_W);
    for (int j = 0; j < N_H1; j++) begin
      longint d, bnv;
      wv = new [N_IN];
      for (int i = 0; i < N_IN; i++) wv[i] = s8(cmem[OFF_D1_W + j * N_IN + i]);
      d = ref_dense_dot(a0, wv, s8(cmem[OFF_D1_B + j]), W_FRAC, A_W);
      if (d == 127 || d == -128) n_sat++;
      bnv = ref_bn(d, s8(cmem[OFF_BN1_S + j]), s8(cmem[OFF_BN1_B + j]), A_FRAC, BNH_S_FRAC, A_FRAC, A_W);
      if (bnv < 0) n_lrelu_neg++;
      h1[j] = ref_lrelu(bnv, LRELU_ALPHA, LRELU_FRAC);
    end
    for (int j = 0; j < N_H2; j++) begin
      longint d, bnv;
      wv = new [N_H1];
      for (int i = 0; i < N_H1; i++) wv[i] = s8(cmem[OFF_D2_W + j * N_H1 + i]);
      d = ref_dense_dot(h1, wv, s8(cmem[OFF_D2_B + j]), W_FRAC, A_W);
      bnv = ref_bn(d, s8(cmem[OFF_BN2_S + j]), s8(cmem[OFF_BN2_B + j]), A_FRAC, BNH_S_FRAC, A_FRAC, A_W);
      h2[j] = ref_lrelu(bnv, LRELU_ALPHA, LRELU_FRAC);
    end
    for (int j = 0; j < N_LAT; j++) begin
      wv = new [N_H2];
      for (int i = 0; i < N_H2; i++) wv[i] = s8(cmem[OFF_MU_W + j * N_H2 + i]);
      mm[j] = ref_dense_dot(h2, wv, s8(cmem[OFF_MU_B + j]), W_FRAC, A_W);
      for (int i = 0; i < N_H2; i++) wv[i] = s8(cmem[OFF_LV_W + j * N_H2 + i]);
      ll[j] = ref_dense_dot(h2, wv, s8(cmem[OFF_LV_B + j]), W_FRAC, A_W);
      m[j] = mm[j];
      l[j] = ll[j];
    end
    sc = ref_kl(mm, ll, A_FRAC, EXP_W, SCORE_W);
  endtask

  function automatic longint thr_of_cmem();
    return longint'({cmem[OFF_THR + 2], cmem[OFF_THR + 1], cmem[OFF_THR]});
  endfunction

  // ---------------------------------------------------------- configuration
  task automatic cfg_write(int a, logic [7:0] d);
    cfg_we <= 1; cfg_addr <= CFG_AW'(a); cfg_wdata <= d;
    cmem[a] = d;
    @(posedge clk);
  endtask

  function automatic logic [7:0] rnd_w(int mag);
    if ($urandom % 2 == 0) return 8'h00;  // pruned connection
    return 8'(int'($urandom % (2 * mag + 1)) - mag);
  endfunction

  // ---------------------------------------------------------- output checker
  int cyc = 0, rd_ptr = 0, first_in_cyc = -1, first_out_cyc = -1, prev_out_cyc = -10;
  always @(posedge clk) cyc++;
  always @(negedge clk) begin
    if (in_valid && first_in_cyc < 0) first_in_cyc = cyc;
    if (out_valid) begin
      if (first_out_cyc < 0) first_out_cyc = cyc;
      if (prev_out_cyc == cyc - 1) n_b2b++;
      else if (rd_ptr > 0) n_gap++;
      prev_out_cyc = cyc;
      checks += 4;
      if (longint'(score) != e_score[rd_ptr]) begin
        failures++;
        if (failures < 10) $display("event %0d score %0d expected %0d", rd_ptr, score, e_score[rd_ptr]);
      end
      if (accept != e_acc[rd_ptr]) begin
        failures++;
        if (failures < 10) $display("event %0d accept %0b expected %0b", rd_ptr, accept, e_acc[rd_ptr]);
      end
      for (int j = 0; j < N_LAT; j++)
        if (longint'(mu[j]) != e_mu[rd_ptr][j] || longint'(log_var[j]) != e_lv[rd_ptr][j]) begin
          failures++;
          if (failures < 10) $display("event %0d latent %0d mismatch", rd_ptr, j);
        end
      if (accept) n_accept++; else n_reject++;
      rd_ptr++;
    end
  end

  // ---------------------------------------------------------- stimulus
  initial begin
    longint sorted [$];
    longint thr;
    int change_at;
    for (int o = 0; o < N_OBJ; o++)
      for (int f = 0; f < N_FEAT; f++) objects[o][f] = '0;
    repeat (3) @(posedge clk);
    rst_n <= 1;

    // coefficients
    for (int i = 0; i < N_IN; i++) begin
      cfg_write(OFF_BN0_S + i, 8'($urandom % 40 + 1));        // scale 1/256 .. 40/256
      cfg_write(OFF_BN0_B + i, 8'(int'($urandom % 33) - 16));
    end
    for (int k = 0; k < N_H1 * N_IN; k++) cfg_write(OFF_D1_W + k, rnd_w(40));
    for (int j = 0; j < N_H1; j++) begin
      cfg_write(OFF_D1_B + j, 8'(int'($urandom % 33) - 16));
      cfg_write(OFF_BN1_S + j, 8'($urandom % 64 + 16));
      cfg_write(OFF_BN1_B + j, 8'(int'($urandom % 33) - 16));
    end
    for (int k = 0; k < N_H2 * N_H1; k++) cfg_write(OFF_D2_W + k, rnd_w(40));
    for (int j = 0; j < N_H2; j++) begin
      cfg_write(OFF_D2_B + j, 8'(int'($urandom % 33) - 16));
      cfg_write(OFF_BN2_S + j, 8'($urandom % 64 + 16));
      cfg_write(OFF_BN2_B + j, 8'(int'($urandom % 33) - 16));
    end
    for (int k = 0; k < N_LAT * N_H2; k++) begin
      cfg_write(OFF_MU_W + k, rnd_w(30));
      cfg_write(OFF_LV_W + k, rnd_w(30));
    end
    for (int j = 0; j < N_LAT; j++) begin
      cfg_write(OFF_MU_B + j, 8'(int'($urandom % 33) - 16));
      cfg_write(OFF_LV_B + j, 8'(int'($urandom % 33) - 16));
    end
    for (int k = 0; k < 3; k++) cfg_write(OFF_THR + k, 8'h00);
    cfg_we <= 0;

    // read every byte back
    for (int a = 0; a < int'(N_COEFF); a++) begin
      cfg_addr <= CFG_AW'(a);
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (cfg_rdata != cmem[a]) begin
        failures++;
        if (failures < 10) $display("read-back %0d: %02h expected %02h", a, cfg_rdata, cmem[a]);
      end
      @(posedge clk);
    end

    // events: pT >= 0, eta within +-3, phi within +-pi, raw units of 1/4
    for (int e = 0; e < NEV; e++) begin
      int nobj;
      nobj = 3 + $urandom % 16;
      for (int o = 0; o < N_OBJ; o++) begin
        logic present;
        present = (o == N_OBJ - 1) || (o < nobj);
        ev[e][3 * o + 0] = present ? longint'($urandom % ((e % 10 == 0) ? 4000 : 400)) : 0;
        ev[e][3 * o + 1] = (present && o != N_OBJ - 1) ? longint'(int'($urandom % 25) - 12) : 0;
        ev[e][3 * o + 2] = present ? longint'(int'($urandom % 25) - 12) : 0;
      end
      ref_event(ev[e], e_score[e], e_mu[e], e_lv[e]);
      sorted.push_back(e_score[e]);
    end
    sorted.sort();
    thr = sorted[NEV / 2];
    for (int k = 0; k < 3; k++) cfg_write(OFF_THR + k, 8'(thr >> (8 * k)));
    cfg_we <= 0;

    // the threshold changes to the 90th percentile from event change_at on
    change_at = NEV * 2 / 3;
    for (int e = 0; e < NEV; e++)
      e_acc[e] = (e_score[e] > ((e >= change_at) ? sorted[NEV * 9 / 10] : thr));

    @(posedge clk);
    for (int e = 0; e < NEV; e++) begin
      if (e % 37 == 36) begin           // an idle cycle
        in_valid <= 0;
        @(posedge clk);
      end
      if (e == change_at) begin
        // new working point: let the pipeline drain, rewrite the 3 threshold
        // bytes, resume
        in_valid <= 0;
        repeat (LATENCY) @(posedge clk);
        for (int k = 0; k < 3; k++) cfg_write(OFF_THR + k, 8'(sorted[NEV * 9 / 10] >> (8 * k)));
        cfg_we <= 0;
        n_thr_change++;
      end
      for (int o = 0; o < N_OBJ; o++)
        for (int f = 0; f < N_FEAT; f++) objects[o][f] <= raw_t'(ev[e][3 * o + f]);
      in_valid <= 1;
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (LATENCY + 5) @(posedge clk);

    checks++;
    if (rd_ptr != NEV) begin failures++; $display("%0d results for %0d events", rd_ptr, NEV); end
    checks++;
    if (first_out_cyc - first_in_cyc != int'(LATENCY)) begin
      failures++; $display("latency %0d cycles, expected %0d", first_out_cyc - first_in_cyc, LATENCY);
    end
    checks++;
    if (first_out_cyc - first_in_cyc > 16) begin
      failures++; $display("latency above 16 cycles (80 ns at 200 MHz)");
    end
    $display("mechanisms: accept=%0d reject=%0d back_to_back=%0d gaps=%0d sat=%0d lrelu_neg=%0d thr_change=%0d",
             n_accept, n_reject, n_b2b, n_gap, n_sat, n_lrelu_neg, n_thr_change);
    checks += 7;
    if (n_accept == 0)     begin failures++; $display("no event accepted"); end
    if (n_reject == 0)     begin failures++; $display("no event rejected"); end
    if (n_b2b == 0)        begin failures++; $display("no back-to-back events"); end
    if (n_gap == 0)        begin failures++; $display("no gaps"); end
    if (n_sat == 0)        begin failures++; $display("no saturation"); end
    if (n_lrelu_neg == 0)  begin failures++; $display("leaky ReLU negative branch unused"); end
    if (n_thr_change == 0) begin failures++; $display("threshold never changed"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
