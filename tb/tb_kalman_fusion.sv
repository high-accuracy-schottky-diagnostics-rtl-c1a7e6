// tb_kalman_fusion: drives the fusion filter with two noisy tune sensors and
// compares the state x and the EMA-sensor weight w1 after every step with a
// floating-point implementation of the same equations (predict, adapt R_i,
// fuse, update, adapt Q). A shot-noise outlier on sensor 1 must make its
// weight drop below one half in that step, as the adaptive scheme intends.
module tb_kalman_fusion;
  import tune_pkg::*;
  logic clk = 0, rst_n = 1, clear = 0, start = 0, busy, done;
  tune_t z1 = '0, z2 = '0, x;
  frac16_t alpha = frac16_t'(17'd19661), w1;   // 0.3
  int checks = 0, failures = 0;

  kalman_fusion dut (.*);
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

  initial begin
    real mx, mp, mq, mr1, mr2, a, xp, pp, ww1, zf, rf, kk, zz1, zz2;
    int cyc;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    a = real'(alpha) / 65536.0;
    for (int t = 0; t < 60; t++) begin
      real truth;
      truth = (t < 40) ? 0.32 : 0.36;     // a tune jump at step 40
      zz1 = truth + (real'($urandom_range(0, 200)) - 100.0) / 65536.0;
      zz2 = truth + (real'($urandom_range(0, 1000)) - 500.0) / 65536.0;
      if (t == 25) zz1 = 0.40;             // shot noise on the EMA tune
      z1 = tune_t'(int'(zz1 * 65536.0));
      z2 = tune_t'(int'(zz2 * 65536.0));
      zz1 = real'(z1) / 65536.0;
      zz2 = real'(z2) / 65536.0;
      if (t == 0) begin
        mx = zz1;
        mp = real'(1 << 20) / 4294967296.0;
        mq = real'(1 << 12) / 4294967296.0;
        mr1 = real'(1 << 16) / 4294967296.0;
        mr2 = mr1;
        ww1 = 0.5;
      end else begin
        xp = mx;
        pp = mp + mq;
        mr1 = a * (zz1 - xp) ** 2 + (1.0 - a) * mr1;
        mr2 = a * (zz2 - xp) ** 2 + (1.0 - a) * mr2;
        ww1 = (1.0 / mr1) / (1.0 / mr1 + 1.0 / mr2);
        zf = ww1 * zz1 + (1.0 - ww1) * zz2;
        rf = 1.0 / (1.0 / mr1 + 1.0 / mr2);
        kk = pp / (pp + rf);
        mx = xp + kk * (zf - xp);
        mp = (1.0 - kk) * pp;
        mq = a * (zf - xp) ** 2 + (1.0 - a) * mq;
      end
      @(negedge clk);
      start = 1;
      @(negedge clk);
      start = 0;
      cyc = 1;
      while (!done) begin
        @(negedge clk);
        cyc++;
      end
      check(cyc <= 130, $sformatf("step %0d took %0d cycles", t, cyc));
      check((real'(x) / 65536.0 - mx) < 0.0005 && (mx - real'(x) / 65536.0) < 0.0005,
            $sformatf("step %0d x=%f expected %f", t, real'(x) / 65536.0, mx));
      check((real'(w1) / 65536.0 - ww1) < 0.02 && (ww1 - real'(w1) / 65536.0) < 0.02,
            $sformatf("step %0d w1=%f expected %f", t, real'(w1) / 65536.0, ww1));
      if (t == 25) check(real'(w1) / 65536.0 < 0.5, "outlier did not lower the EMA weight");
      if (t == 59) check((real'(x) / 65536.0 - 0.36) < 0.003 && (0.36 - real'(x) / 65536.0) < 0.003, "did not follow the tune jump");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
