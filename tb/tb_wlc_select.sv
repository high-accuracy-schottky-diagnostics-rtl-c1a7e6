// tb_wlc_select: a hand-made spectrum where the global maximum is far from
// the reference and a smaller peak sits at it (the WLC tune must be the
// smaller peak for k = 0.6 and the global maximum for k = 0), followed by
// random spectra checked against a floating-point model: local maxima in the
// region, q_ref = w q_ema + (1-w) q_prev, distances and amplitudes normalised
// by their maxima, conf = k (1 - d) + (1 - k) a, highest confidence wins.
module tb_wlc_select;
  import tune_pkg::*;
  localparam int NQ = 64, QW = 6;
  logic clk = 0, rst_n = 1, in_valid = 0, in_last = 0, start = 0, busy, done;
  logic [QW-1:0] in_idx = '0, reg_lo = QW'(4), reg_hi = QW'(60);
  psd_t in_data = '0;
  tune_t q_ema = '0, q_prev = '0, q_wlc, q_ref;
  frac16_t w = '0, k = '0;
  logic [QW:0] npeaks;
  int checks = 0, failures = 0;

  wlc_select #(.NQ(NQ)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #3000000;
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

  longint p [NQ];
  function automatic int tq(int j); return j * 32768 / NQ; endfunction

  task automatic run(input int qe, input int qp, input real wr, input real kr, output int res);
    int cyc;
    w = frac16_t'(int'(wr * 65536.0));
    k = frac16_t'(int'(kr * 65536.0));
    for (int j = 0; j < NQ; j++) begin
      @(negedge clk);
      in_valid = 1;
      in_idx = QW'(j);
      in_data = psd_t'(p[j]);
      in_last = (j == NQ - 1);
    end
    @(negedge clk);
    in_valid = 0;
    in_last = 0;
    q_ema = tune_t'(qe);
    q_prev = tune_t'(qp);
    start = 1;
    @(negedge clk);
    start = 0;
    cyc = 1;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end
    check(cyc == 2 * int'(npeaks) + 4, $sformatf("latency %0d for %0d peaks", cyc, npeaks));
    res = int'(q_wlc);
  endtask

  initial begin
    int res;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // hand-made case
    for (int j = 0; j < NQ; j++) p[j] = 1000;
    p[49] = 500000; p[50] = 1000000; p[51] = 500000;
    p[20] = 600000;
    p[30] = 300000;
    run(tq(21), tq(19), 0.5, 0.6, res);
    check(int'(q_ref) == tq(20), $sformatf("q_ref %0d expected %0d", q_ref, tq(20)));
    check(res == tq(20), $sformatf("k=0.6 picked %0d expected %0d", res, tq(20)));
    // the three peaks plus the flat region edge at bin 4
    check(npeaks == 4, $sformatf("npeaks %0d", npeaks));
    run(tq(21), tq(19), 0.5, 0.0, res);
    check(res == tq(50), $sformatf("k=0 picked %0d expected %0d", res, tq(50)));
    // random spectra against the model
    for (int t = 0; t < 40; t++) begin
      int qe, qp, best_j, np;
      real wr, kr, qref, dmax, amax, best_c;
      int pk [$];
      pk.delete();
      for (int j = 0; j < NQ; j++) p[j] = longint'($urandom_range(0, 1000000));
      qe = int'($urandom_range(0, 32767));
      qp = int'($urandom_range(0, 32767));
      wr = real'($urandom_range(0, 100)) / 100.0;
      kr = real'($urandom_range(0, 100)) / 100.0;
      wr = real'(int'(wr * 65536.0)) / 65536.0;
      kr = real'(int'(kr * 65536.0)) / 65536.0;
      for (int j = 4; j <= 60; j++)
        if ((j == 4 || p[j] > p[j-1]) && (j == 60 || p[j] >= p[j+1])) pk.push_back(j);
      qref = $floor(wr * qe + (1.0 - wr) * qp);
      dmax = 0.0;
      amax = 0.0;
      foreach (pk[i]) begin
        real d;
        d = (tq(pk[i]) > qref) ? tq(pk[i]) - qref : qref - tq(pk[i]);
        if (d > dmax) dmax = d;
        if (real'(p[pk[i]]) > amax) amax = real'(p[pk[i]]);
      end
      best_c = -1.0;
      best_j = 0;
      foreach (pk[i]) begin
        real d, c;
        d = (tq(pk[i]) > qref) ? tq(pk[i]) - qref : qref - tq(pk[i]);
        c = kr * (1.0 - d / dmax) + (1.0 - kr) * real'(p[pk[i]]) / amax;
        if (c > best_c) begin
          best_c = c;
          best_j = pk[i];
        end
      end
      np = pk.size();
      run(qe, qp, wr, kr, res);
      check(int'(npeaks) == np, $sformatf("t=%0d npeaks %0d expected %0d", t, npeaks, np));
      check(int'(q_ref) == int'(qref) || int'(q_ref) == int'(qref) - 1 || int'(q_ref) == int'(qref) + 1,
            $sformatf("t=%0d q_ref %0d expected %f", t, q_ref, qref));
      check(res == tq(best_j), $sformatf("t=%0d picked %0d expected %0d", t, res, tq(best_j)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
