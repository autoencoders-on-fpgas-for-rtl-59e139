// tb_ae_coeff_regs -- self-checking test of ae_coeff_regs at its full size.
// Writes a pseudo-random byte to every address, then checks the parallel
// coeff output and the one-cycle read-back of every address, that writes
// beyond the last address are ignored and read as 0, and that a rewrite of a
// single byte changes only that byte.
module tb_ae_coeff_regs;
  localparam int N = 2699, AW = 12;

  logic clk = 0, cfg_we = 0;
  logic [AW-1:0] cfg_addr = '0;
  logic [7:0] cfg_wdata = '0, cfg_rdata;
  logic [7:0] coeff [N];
  logic [7:0] model [N];
  int checks = 0, failures = 0;

  ae_coeff_regs #(.N_BYTES(N), .AW(AW)) dut (.*);

  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [7:0] pat(int a, int seed);
    return 8'((a * 37 + seed * 101 + (a >> 3)) ^ (a >> 5));
  endfunction

  initial begin
    @(posedge clk);
    for (int a = 0; a < N; a++) begin
      cfg_we <= 1; cfg_addr <= AW'(a); cfg_wdata <= pat(a, 1);
      model[a] = pat(a, 1);
      @(posedge clk);
    end
    // writes past the end are ignored
    for (int a = N; a < 2 ** AW; a += 97) begin
      cfg_we <= 1; cfg_addr <= AW'(a); cfg_wdata <= 8'hA5;
      @(posedge clk);
    end
    cfg_we <= 0;
    @(posedge clk);
    @(negedge clk);
    for (int a = 0; a < N; a++) begin
      checks++;
      if (coeff[a] != model[a]) begin
        failures++;
        if (failures < 10) $display("coeff[%0d] = %02h, expected %02h", a, coeff[a], model[a]);
      end
    end
    // read-back, one cycle after the address
    for (int a = 0; a < N + 20; a++) begin
      @(posedge clk);
      cfg_addr <= AW'(a);
      @(posedge clk);
      @(negedge clk);
      checks++;
      if (cfg_rdata != ((a < N) ? model[a] : 8'h00)) begin
        failures++;
        if (failures < 10) $display("read %0d = %02h", a, cfg_rdata);
      end
    end
    // single rewrite
    @(posedge clk);
    cfg_we <= 1; cfg_addr <= AW'(1234); cfg_wdata <= ~model[1234];
    model[1234] = ~model[1234];
    @(posedge clk);
    cfg_we <= 0;
    @(negedge clk);
    for (int a = 1200; a < 1300; a++) begin
      checks++;
      if (coeff[a] != model[a]) begin failures++; $display("after rewrite coeff[%0d] wrong", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
