// tb_tune_scenarios: runs the complete design, every parameter at its
// default, through the operating situations the tune monitor must survive at
// a fixed revolution frequency, and measures accuracy the way the design
// targets are stated: the share of results within +-0.001 and +-0.01 of the
// true tune, and the time to re-converge.
//
// Signal: f0 = 7.5 MHz, pickup band 34.5-37.5 MHz, 250 MS/s ADC, 1 ms
// windows (6250 decimated samples). The betatron sideband (5 - q) f0 is
// modelled as a Schottky-like band of K = 8 lines with random phases spread
// over +-15 kHz (about +-2.5 spectral bins, the width the smoothing expects).
// White noise is uniform in +-8000 LSB; the sideband power is set to 1 % of
// the noise power that falls in the 3 MHz band (SNR = -20 dB in band; how the
// SNR is referred is this test's choice). Settings: alpha_EMA = 0.3,
// w = 0.8 (weight of the EMA tune in the WLC reference), k = 0.7, Kalman
// alpha = 0.2; none of these has a published value. With w and k at 0.5 the
// WLC path can follow its own previous value and the filter then trusts it,
// which slows recovery after a signal loss.
//
// Timeline (window index = result time stamp / 6250):
//   0-29    q = 0.32
//   30-31   contamination: four times stronger noise (clipped to 16 bits)
//   60-69   signal loss: no sideband at all
//   100     tune jump to q = 0.30 (sideband at 35.25 MHz), kept to window 150
// Checks: within +-0.01 in at least 90 % of windows 20-29 (after a 20 ms
// start-up); back within
// +-0.01, and staying there, less than 50 windows after the end of the
// contamination, the end of the signal loss and the jump; the WLC and EMA
// tunes differed at least once; the Kalman weight of the EMA tune moved away
// from one half at least once.
module tb_tune_scenarios;
  import tune_pkg::*;
  localparam real FS  = 250.0e6;
  localparam real DF  = FS / 40.0 / 1024.0;
  localparam real F0  = 7.5e6;
  localparam real PI2 = 2.0 * 3.14159265358979;
  localparam int  WIN = 6250;
  localparam int  K   = 8;
  localparam int  NWIN = 150;

  logic          clk = 0, rst_n = 1;
  logic          adc_valid = 0;
  sample_t       adc_data = '0;
  logic [13:0]   cfg_win_len = 14'(WIN);
  logic          cfg_win_auto = 0;
  freq_t         cfg_f0_tol = '0;
  freq_t         cfg_f0 = '0, cfg_band_lo = '0, cfg_band_hi = '0;
  frac16_t       cfg_alpha_ema = 17'(int'(0.3 * 65536.0));
  frac16_t       cfg_w_ref = 17'(int'(0.8 * 65536.0)), cfg_k_wlc = 17'(int'(0.7 * 65536.0));
  frac16_t       cfg_alpha_kf = 17'(int'(0.2 * 65536.0));
  logic [8:0]    cfg_reg_lo = 9'd0, cfg_reg_hi = 9'd511;
  logic          cfg_above_half = 0, cfg_clear = 0;
  logic [31:0]   cfg_lat_comp = 32'd0;
  logic          tune_valid, tune_unreliable, overflow;
  tune_t         tune_q, q_ema, q_wlc, q_ref;
  logic [31:0]   tune_ts;
  frac16_t       w_ema;
  logic [9:0]    wlc_npeaks;
  logic [15:0]   tune_harmonic;

  tune_top dut (.*);

  always #2 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    #(4 * longint'(NWIN + 10) * 40 * WIN);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- beam and noise model ----------------
  real    ph [K];
  real    doff [K];
  real    amp;
  longint t_adc = 0;
  initial begin
    // sideband power K A^2 / 2 = 0.01 * sigma^2 * 3 MHz / 125 MHz,
    // sigma^2 = 16001^2 / 12 for uniform noise in +-8000
    amp = $sqrt(2.0 * 0.01 * (16001.0 * 16001.0 / 12.0) * (3.0 / 125.0) / K);
    for (int k = 0; k < K; k++) begin
      ph[k]   = PI2 * real'($urandom_range(0, 9999)) / 10000.0;
      doff[k] = (real'(k) - (K - 1) / 2.0) / ((K - 1) / 2.0) * 15.0e3;
    end
  end

  function automatic real true_q(longint win);
    return (win >= 100) ? 0.30 : 0.32;
  endfunction

  always @(posedge clk) if (rst_n) begin
    real v, nscale;
    longint w;
    w = t_adc / (40 * WIN);
    nscale = (w == 30 || w == 31) ? 4.0 : 1.0;
    v = nscale * (real'($urandom_range(0, 16000)) - 8000.0);
    if (!(w >= 60 && w <= 69))
      for (int k = 0; k < K; k++) begin
        ph[k] = ph[k] + PI2 * ((5.0 - true_q(w)) * F0 + doff[k]) / FS;
        if (ph[k] > PI2) ph[k] = ph[k] - PI2;
        v = v + amp * $sin(ph[k]);
      end
    if (v > 32767.0) v = 32767.0;
    if (v < -32768.0) v = -32768.0;
    adc_valid <= 1'b1;
    adc_data  <= sample_t'(int'(v));
    t_adc++;
  end

  // ---------------- results per window ----------------
  real res [NWIN + 1];
  bit  got [NWIN + 1];
  int  n_res = 0, n_wlc_ne_ema = 0, n_w_moved = 0;
  always @(posedge clk) if (rst_n && tune_valid) begin
    int w;
    w = int'(tune_ts / WIN);
    if (w <= NWIN) begin
      res[w] = real'(tune_q) / 65536.0;
      got[w] = 1;
    end
    n_res++;
    if (q_wlc != q_ema) n_wlc_ne_ema++;
    if (w_ema > 17'h0a000 || w_ema < 17'h06000) n_w_moved++;
    if (w % 10 == 0)
      $display("window %0d: q=%0.4f (true %0.2f) q_ema=%0.4f q_wlc=%0.4f w_ema=%0.3f",
               w, res[w], true_q(w), real'(q_ema) / 65536.0, real'(q_wlc) / 65536.0, real'(w_ema) / 65536.0);
  end

  function automatic real err(int w);
    real e;
    e = res[w] - true_q(w);
    return e < 0.0 ? -e : e;
  endfunction

  // first window from which all results up to 'last' lie within tol
  function automatic int settle(int from, int last, real tol);
    int s;
    s = last + 1;
    for (int w = last; w >= from; w--) begin
      if (!got[w] || err(w) > tol) break;
      s = w;
    end
    return s;
  endfunction

  initial begin
    int in1, in10, n, s_cont, s_loss, s_jump;
    real mu;
    for (int w = 0; w <= NWIN; w++) got[w] = 0;
    cfg_f0      = freq_t'(longint'(F0 / DF * 65536.0));
    cfg_band_lo = freq_t'(longint'(34.5e6 / DF * 65536.0));
    cfg_band_hi = freq_t'(longint'(37.5e6 / DF * 65536.0));
    #1 rst_n = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (t_adc >= longint'(NWIN + 2) * 40 * WIN);
    repeat (100000) @(posedge clk);

    in1 = 0; in10 = 0; n = 0; mu = 0.0;
    for (int w = 20; w <= 29; w++) if (got[w]) begin
      n++;
      mu += err(w);
      if (err(w) <= 0.001) in1++;
      if (err(w) <= 0.01) in10++;
    end
    $display("windows 20-29: mean |error| %0.5f, within 0.001: %0d of %0d, within 0.01: %0d of %0d",
             mu / n, in1, n, in10, n);
    check(n == 10, "a result for every window");
    check(in10 >= 9, "steady state within 0.01 in at least 90 % of windows");
    s_cont = settle(32, 59, 0.01);
    s_loss = settle(70, 99, 0.01);
    s_jump = settle(100, NWIN, 0.01);
    $display("settled after contamination at window %0d, after signal loss at %0d, after the jump at %0d",
             s_cont, s_loss, s_jump);
    check(s_cont - 32 < 50 && s_cont <= 59, "converged after contamination");
    check(s_loss - 70 < 50 && s_loss <= 99, "converged after signal loss");
    check(s_jump - 100 < 50, "converged within 50 ms after the tune jump");
    check(n_res >= NWIN, "results for all windows");
    check(n_wlc_ne_ema > 0, "WLC and EMA tunes differed at least once");
    check(n_w_moved > 0, "fusion weight adapted");
    check(!overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
