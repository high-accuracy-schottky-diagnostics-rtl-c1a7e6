// tb_ema_peak: streams a sequence of spectra and compares the per-bin EMA
// (alpha P_t + (1 - alpha) EMA_{t-1}, first spectrum initialises it) and the
// reported tune of its largest bin inside the region with a floating-point
// model. The spectra put a strong, moving peak outside the region and a weak
// persistent peak inside it that only the average reveals; one spectrum has
// a one-off spike inside the region that the average should smooth away
// for small alpha.
module tb_ema_peak;
  import tune_pkg::*;
  localparam int NQ = 32, QW = 5;
  logic clk = 0, rst_n = 1, clear = 0, in_valid = 0, in_last = 0, tune_valid;
  logic [QW-1:0] in_idx = '0, reg_lo = QW'(8), reg_hi = QW'(24);
  psd_t in_data = '0;
  frac16_t alpha = frac16_t'(17'd13107);   // 0.2
  tune_t tune;
  int checks = 0, failures = 0;

  ema_peak #(.NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 12) $display("FAIL: %s", msg);
    end
  endtask

  real ema [NQ];
  initial begin
    real a, best;
    int bj;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    a = real'(alpha) / 65536.0;
    for (int t = 0; t < 20; t++) begin
      real p [NQ];
      for (int j = 0; j < NQ; j++) begin
        p[j] = real'($urandom_range(0, 100000));
        if (j == 13) p[j] += 150000.0;                       // weak true line
        if (j == 2 + (t % 4)) p[j] += 5000000.0;            // strong, outside region
        if (t == 8 && j == 20) p[j] += 3000000.0;           // one-off spike
      end
      for (int j = 0; j < NQ; j++) ema[j] = (t == 0) ? p[j] : a * p[j] + (1.0 - a) * ema[j];
      best = -1.0;
      bj = 0;
      for (int j = 8; j <= 24; j++) if (ema[j] > best) begin
        best = ema[j];
        bj = j;
      end
      for (int j = 0; j < NQ; j++) begin
        @(negedge clk);
        in_valid = 1;
        in_idx = QW'(j);
        in_data = psd_t'(longint'(p[j]));
        in_last = (j == NQ - 1);
      end
      @(negedge clk);
      in_valid = 0;
      in_last = 0;
      check(tune_valid, "tune_valid one cycle after the last bin");
      check(tune == tune_t'(bj * 32768 / NQ), $sformatf("t=%0d tune %0d expected bin %0d (%0d)", t, tune, bj, bj * 32768 / NQ));
      for (int j = 0; j < NQ; j++) begin
        real e;
        e = real'(dut.ema[j]);
        check((e - ema[j]) < 0.001 * ema[j] + 20.0 && (ema[j] - e) < 0.001 * ema[j] + 20.0,
              $sformatf("t=%0d ema[%0d]=%f expected %f", t, j, e, ema[j]));
      end
      if (t == 8) check(bj == 20, "spike wins for one step at alpha 0.2");
      if (t == 19) check(bj == 13, "weak persistent line found");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
