// tb_post_proc: sweeps the revolution frequency from 4 to 7.5 MHz for a BPM
// band of 34.5-37.5 MHz (36 MHz centre, 3 MHz wide) and a fractional tune
// of 0.68 (given as the mapped 0.32 with above_half = 1), and also for 0.32
// directly. Each unreliable flag is compared with a floating-point model of
// the rule: n = round(f_c / f0); reliable when (n - q) f0 or (n + q) f0 is in
// the band. Checks the time-stamp shift and that both flag values occur.
module tb_post_proc;
  import tune_pkg::*;
  localparam real DF = 6.25e6 / 1024.0;    // one STFT bin in Hz
  logic clk = 0, rst_n = 1, start = 0, above_half = 0, busy, done, unreliable;
  tune_t q = '0, q_out;
  freq_t f0 = '0, band_lo = '0, band_hi = '0;
  logic [31:0] ts_in = '0, lat_comp = '0, ts_out;
  logic [15:0] harmonic;
  int checks = 0, failures = 0;

  post_proc dut (.*);
  always #5 clk = ~clk;

  initial begin
    #5000000;
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

  function automatic freq_t to_bins(real hz);
    return freq_t'(longint'(hz / DF * 65536.0));
  endfunction

  initial begin
    int n_unrel, n_rel;
    n_unrel = 0;
    n_rel = 0;
    #1 rst_n = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    band_lo = to_bins(34.5e6);
    band_hi = to_bins(37.5e6);
    for (int mode = 0; mode < 2; mode++)
      for (int s = 0; s <= 350; s++) begin
        real rf0, fc, qe, lo, hi, lower, upper;
        int n, cyc;
        bit exp_unrel;
        rf0 = 4.0e6 + s * 1.0e4;
        q = tune_t'(int'(0.32 * 65536.0));
        above_half = (mode == 0);
        f0 = to_bins(rf0);
        ts_in = 32'($urandom);
        lat_comp = 32'($urandom_range(0, 100000));
        // model in the same bin units the block sees
        lo = real'(band_lo) / 65536.0;
        hi = real'(band_hi) / 65536.0;
        fc = (lo + hi) / 2.0;
        n = int'($floor(fc / (real'(f0) / 65536.0) + 0.5));
        qe = above_half ? 1.0 - real'(q) / 65536.0 : real'(q) / 65536.0;
        lower = (n - qe) * real'(f0) / 65536.0;
        upper = (n + qe) * real'(f0) / 65536.0;
        exp_unrel = !((lower >= lo && lower <= hi) || (upper >= lo && upper <= hi));
        @(negedge clk);
        start = 1;
        @(negedge clk);
        start = 0;
        cyc = 1;
        while (!done) begin
          @(negedge clk);
          cyc++;
        end
        // skip points within a thousandth of a bin of a band edge (rounding)
        if (!((lower - lo) ** 2 < 1e-6 || (lower - hi) ** 2 < 1e-6 || (upper - lo) ** 2 < 1e-6 || (upper - hi) ** 2 < 1e-6)) begin
          check(unreliable == exp_unrel, $sformatf("f0=%f MHz q=%f: unreliable=%0d expected %0d (n=%0d)", rf0 / 1e6, qe, unreliable, exp_unrel, n));
          check(int'(harmonic) == n, $sformatf("f0=%f: harmonic %0d expected %0d", rf0 / 1e6, harmonic, n));
        end
        check(ts_out == ts_in - lat_comp, "time stamp");
        check(q_out == q, "q passes through");
        check(cyc < 45, $sformatf("latency %0d", cyc));
        if (unreliable) n_unrel++; else n_rel++;
      end
    check(n_unrel > 10 && n_rel > 10, $sformatf("flag values seen: %0d unreliable, %0d reliable", n_unrel, n_rel));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
