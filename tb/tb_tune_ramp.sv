// tb_tune_ramp: the complete design, every parameter at its default, during
// the last part of an energy ramp. The revolution frequency rises at
// 0.01 MHz per millisecond (4 -> 7.5 MHz in 0.35 s) from 6.9 MHz to 7.5 MHz,
// then stays at 7.5 MHz; the fractional tune is 0.32, the pickup band is
// 34.5-37.5 MHz. Both sidebands of harmonic 5 are present, each at -10 dB
// SNR in the band. (During the ramp a sideband moves by about 9 spectral bins
// within one 1 ms window, which spreads its power; at -20 dB this design
// found the moving sideband only once f0 had stopped, so the ramp is run at
// -10 dB, one of the SNR values the method is specified for.) The signal
// model is that of tb_tune_scenarios: 8 lines spread over +-15 kHz around
// each sideband, white uniform noise in +-8000 LSB.
//
// The upper sideband 5.32 f0 is in the band up to f0 = 7.049 MHz (window 15),
// the lower one 4.68 f0 from f0 = 7.372 MHz (window 47) on. In between no
// sideband is visible; results there that still carry the right tune must be
// flagged unreliable, and the flag follows the rule for whatever tune the
// design reports.
// f0 is given to the design continuously; the design samples it when a
// window starts processing, i.e. at the end of the window, which this test
// accepts as the f0 of that window.
//
// Checks: every result's unreliable flag equals the rule evaluated in
// floating point at the f0 the design sampled; windows 70-89 (f0 fixed)
// are within +-0.01 of the true tune in at least 90 % of cases, and windows
// 6-14 (upper sideband only) in at least 7 of 9; the reported harmonic is 5;
// the flag takes both values.
module tb_tune_ramp;
  import tune_pkg::*;
  localparam real FS   = 250.0e6;
  localparam real DF   = FS / 40.0 / 1024.0;
  localparam real QT   = 0.32;
  localparam real PI2  = 2.0 * 3.14159265358979;
  localparam int  WIN  = 6250;
  localparam int  K    = 8;
  localparam int  NWIN = 90;
  localparam real SNR  = 0.1;   // sideband power / in-band noise power (-10 dB)

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
  real    ph [K], ph2 [K];
  real    doff [K];
  real    amp, f0_now;
  longint t_adc = 0;
  initial begin
    amp = $sqrt(2.0 * SNR * (16001.0 * 16001.0 / 12.0) * (3.0 / 125.0) / K);
    for (int k = 0; k < K; k++) begin
      ph[k]   = PI2 * real'($urandom_range(0, 9999)) / 10000.0;
      ph2[k]  = PI2 * real'($urandom_range(0, 9999)) / 10000.0;
      doff[k] = (real'(k) - (K - 1) / 2.0) / ((K - 1) / 2.0) * 15.0e3;
    end
    f0_now = 6.9e6;
  end

  always @(posedge clk) if (rst_n) begin
    real v;
    // 0.01 MHz per ms = 0.01e6 Hz per 250000 ADC clocks
    f0_now = 6.9e6 + real'(t_adc) * (0.01e6 / 250000.0);
    if (f0_now > 7.5e6) f0_now = 7.5e6;
    v = real'($urandom_range(0, 16000)) - 8000.0;
    for (int k = 0; k < K; k++) begin
      ph[k] = ph[k] + PI2 * ((5.0 - QT) * f0_now + doff[k]) / FS;
      if (ph[k] > PI2) ph[k] = ph[k] - PI2;
      ph2[k] = ph2[k] + PI2 * ((5.0 + QT) * f0_now - doff[k]) / FS;
      if (ph2[k] > PI2) ph2[k] = ph2[k] - PI2;
      v = v + amp * ($sin(ph[k]) + $sin(ph2[k]));
    end
    adc_valid <= 1'b1;
    adc_data  <= sample_t'(int'(v));
    cfg_f0    <= freq_t'(longint'(f0_now / DF * 65536.0));
    t_adc++;
  end

  // ---------------- per-result checks ----------------
  int n_rel = 0, n_unrel = 0, n_res = 0, in10 = 0, n_fixed = 0, in10_up = 0;
  always @(posedge clk) if (rst_n && tune_valid) begin
    real f0b, lo, hi, lower, upper, e;
    int  n, w;
    bit  exp_unrel;
    w   = int'(tune_ts / WIN);
    f0b = real'(dut.f0_q) / 65536.0;
    lo  = real'(cfg_band_lo) / 65536.0;
    hi  = real'(cfg_band_hi) / 65536.0;
    n   = int'($floor((lo + hi) / 2.0 / f0b + 0.5));
    lower = (n - real'(tune_q) / 65536.0) * f0b;
    upper = (n + real'(tune_q) / 65536.0) * f0b;
    exp_unrel = !((lower >= lo && lower <= hi) || (upper >= lo && upper <= hi));
    check(tune_unreliable == exp_unrel,
          $sformatf("window %0d: flag %0d, rule gives %0d at f0 %0.4f MHz", w, tune_unreliable, exp_unrel, f0b * DF / 1e6));
    if (tune_unreliable) n_unrel++; else n_rel++;
    n_res++;
    e = real'(tune_q) / 65536.0 - QT;
    if (e < 0.0) e = -e;
    if (w >= 6 && w <= 14 && e <= 0.01) in10_up++;
    if (w >= 70 && w < NWIN) begin
      n_fixed++;
      if (e <= 0.01) in10++;
    end
    check(tune_harmonic == 16'd5, $sformatf("harmonic %0d, expected 5", tune_harmonic));
    if (w % 3 == 0)
      $display("window %0d: f0 %0.3f MHz q=%0.4f q_ema=%0.4f q_wlc=%0.4f unreliable=%0d",
               w, f0b * DF / 1e6, real'(tune_q) / 65536.0, real'(q_ema) / 65536.0,
               real'(q_wlc) / 65536.0, tune_unreliable);
  end

  initial begin
    cfg_band_lo = freq_t'(longint'(34.5e6 / DF * 65536.0));
    cfg_band_hi = freq_t'(longint'(37.5e6 / DF * 65536.0));
    #1 rst_n = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;
    wait (t_adc >= longint'(NWIN + 1) * 40 * WIN);
    repeat (100000) @(posedge clk);
    $display("windows 70-89 within 0.01: %0d of %0d; windows 6-14: %0d of 9; reliable %0d, unreliable %0d",
             in10, n_fixed, in10_up, n_rel, n_unrel);
    check(in10_up >= 7, "tune found from the upper sideband early in the ramp");
    check(n_res >= NWIN, "a result for every window");
    check(n_fixed == 20 && in10 >= 18, "tune within 0.01 after the ramp");
    check(n_rel > 0 && n_unrel > 0, "flag took both values");
    check(!overflow, "no overflow");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
