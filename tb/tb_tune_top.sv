// tb_tune_top: end-to-end test of the whole tune-measurement chain at its
// default sizes (D = 40, 160 taps, 8192-sample banks, 1024-point FFT,
// 512 tune bins).
//
// Stimulus: an ADC sampled at 250 MS/s sees the lower betatron sideband of
// revolution harmonic 5 for f0 = 7.5 MHz and q = 0.32, i.e. a line at
// (5 - 0.32) * 7.5 MHz = 35.1 MHz inside a 34.5-37.5 MHz BPM band, buried in
// broadband uniform noise (about -16 dB below the line in the whole band,
// well above it per spectral bin). Windows are 6250 decimated samples
// (1 ms). After decimation the line lands above the folding frequency, so
// the mapper must use the inverted (mirrored) alias to find it.
//
// During the sixth window a stronger interfering line at the position of
// tune 0.2 appears for one window only; the median filters must keep it out
// of q_ema and q_wlc.
//
// Phases: (A) ten windows with above_half = 0: the fused tune must settle
// within two tune bins of 0.32 and be flagged reliable, with time stamps
// one window apart; (B) above_half = 1 for two windows: the tune is then
// read as 0.68, whose sidebands miss the band, so the result must be
// flagged unreliable; (C) a 64-sample window, far shorter than the
// processing time, must make the ping-pong buffer overflow; (D) automatic
// window length with cfg_win_len = 8192 as the upper limit, a tolerable f0
// change of 10 kHz per window and f0 rising at 20 MHz/s, twice the paper's
// fastest ramp: the windows must shrink to 10 kHz / 20 MHz/s = 0.5 ms,
// i.e. 3125 decimated samples.
// Every mechanism is counted through hierarchical references and a count of
// zero is a failure.
module tb_tune_top;
  import tune_pkg::*;
  localparam real FS  = 250.0e6;
  localparam real DF  = FS / 40.0 / 1024.0;
  localparam real F0  = 7.5e6;
  localparam real QT  = 0.32;
  localparam int  WIN = 6250;

  logic          clk = 0, rst_n = 1;
  logic          adc_valid = 0;
  sample_t       adc_data = '0;
  logic [13:0]   cfg_win_len = 14'(WIN);
  logic          cfg_win_auto = 0;
  freq_t         cfg_f0_tol = freq_t'(longint'(10.0e3 / DF * 65536.0));
  freq_t         cfg_f0 = '0, cfg_band_lo = '0, cfg_band_hi = '0;
  frac16_t       cfg_alpha_ema = 17'(int'(0.3 * 65536.0));
  frac16_t       cfg_w_ref = 17'h08000, cfg_k_wlc = 17'h08000;
  frac16_t       cfg_alpha_kf = 17'(int'(0.1 * 65536.0));
  logic [8:0]    cfg_reg_lo = 9'd0, cfg_reg_hi = 9'd511;
  logic          cfg_above_half = 0, cfg_clear = 0;
  logic [31:0]   cfg_lat_comp = 32'd100;
  logic          tune_valid, tune_unreliable, overflow;
  tune_t         tune_q, q_ema, q_wlc;
  logic [31:0]   tune_ts;
  frac16_t       w_ema;
  tune_t         q_ref;
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
    #(4 * 8000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- ADC model ----------------
  real    ph = 0.0, ph2 = 0.0;
  longint t_adc = 0;
  always @(posedge clk) if (rst_n) begin
    real v;
    ph = ph + 2.0 * 3.14159265358979 * (5.0 - QT) * F0 / FS;
    if (ph > 2.0 * 3.14159265358979) ph = ph - 2.0 * 3.14159265358979;
    v = 1500.0 * $sin(ph) + (real'($urandom_range(0, 16000)) - 8000.0);
    // contamination: during the sixth window a stronger line appears at the
    // position of tune 0.2 ((5 - 0.2) f0 = 36 MHz)
    if (t_adc > longint'(5 * 40 * WIN + 2000) && t_adc < longint'(6 * 40 * WIN)) begin
      ph2 = ph2 + 2.0 * 3.14159265358979 * (5.0 - 0.2) * F0 / FS;
      v = v + 2700.0 * $sin(ph2);
    end
    adc_valid <= 1'b1;
    adc_data  <= sample_t'(int'(v));
    t_adc++;
  end

  // ---------------- mechanism counters ----------------
  int n_bank0 = 0, n_bank1 = 0, n_pad = 0, n_multi = 0, n_invert = 0, n_upright = 0;
  int n_wlc_multi = 0, n_med = 0, n_med_rejected = 0, n_kf = 0, n_rel = 0, n_unrel = 0;
  int n_frames = 0, n_auto = 0, n_auto_ok = 0;
  tune_t last_raw;
  longint cyc = 0, t_start = 0, lat_max = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && dut.psd_start) t_start = cyc;
    if (rst_n && tune_valid && cyc - t_start > lat_max) lat_max = cyc - t_start;
  end
  always @(posedge clk) if (rst_n) begin
    if (dut.psd_start) begin
      if (dut.u_pp.frame_bank) n_bank1++; else n_bank0++;
    end
    if (dut.u_psd.ld_pend && dut.u_psd.ld_pad) n_pad++;
    if (dut.psd_last && dut.u_psd.nbatch > 1) n_multi++;
    if (dut.u_map.state == 2'd2 && dut.u_map.inband && !dut.u_map.walk_end) begin
      if (dut.u_map.fcand[25:0] > (26'(512) << 16)) n_invert++; else n_upright++;
    end
    if (dut.wlc_done && wlc_npeaks > 1) n_wlc_multi++;
    if (dut.ema_valid) last_raw = dut.ema_raw;
    if (dut.mema_valid) begin
      n_med++;
      if (dut.mema_data != last_raw) n_med_rejected++;
    end
    if (dut.kf_done) n_kf++;
    if (dut.psd_start && cfg_win_auto && dut.fr_len != cfg_win_len) begin
      // the first two are transients: a short window queued in phase (C)
      // and the window in which the ramp starts
      n_auto++;
      if (n_auto > 2) begin
        if (dut.fr_len >= 14'd3095 && dut.fr_len <= 14'd3155) n_auto_ok++;
        else $display("automatic window %0d samples", dut.fr_len);
      end
    end
  end

  // f0 ramp for phase (D): 20 MHz/s, i.e. 0.08 Hz per ADC clock
  real f0_r;
  bit  ramp = 0;
  always @(posedge clk) if (ramp) begin
    f0_r   = f0_r + 0.08 / DF * 65536.0;
    cfg_f0 <= freq_t'(longint'(f0_r));
  end

  // ---------------- result checks ----------------
  logic [31:0] prev_ts;
  bit          have_prev = 0;
  always @(posedge clk) if (rst_n && tune_valid) begin
    n_frames++;
    if (tune_unreliable) n_unrel++; else n_rel++;
    $display("frame %0d: q=%0.4f q_ema=%0.4f q_wlc=%0.4f w_ema=%0.3f unreliable=%0d ts=%0d",
             n_frames, real'(tune_q) / 65536.0, real'(q_ema) / 65536.0, real'(q_wlc) / 65536.0,
             real'(w_ema) / 65536.0, tune_unreliable, tune_ts);
    if (have_prev && cfg_win_len == 14'(WIN))
      check(tune_ts - prev_ts == WIN, $sformatf("time stamps %0d apart", tune_ts - prev_ts));
    prev_ts   = tune_ts;
    have_prev = 1;
  end

  initial begin
    cfg_f0      = freq_t'(longint'(F0 / DF * 65536.0));
    cfg_band_lo = freq_t'(longint'(34.5e6 / DF * 65536.0));
    cfg_band_hi = freq_t'(longint'(37.5e6 / DF * 65536.0));
    #1 rst_n = 0;
    repeat (4) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // (A) tracking
    wait (n_frames == 10);
    @(negedge clk);
    check(tune_unreliable == 0, "reliable result expected");
    check(tune_harmonic == 16'd5, $sformatf("harmonic %0d, expected 5", tune_harmonic));
    check(tune_q > tune_t'(int'(QT * 65536.0) - 128) && tune_q < tune_t'(int'(QT * 65536.0) + 128),
          $sformatf("fused tune %0.4f, expected %0.4f", real'(tune_q) / 65536.0, QT));
    check(q_ema > tune_t'(int'(QT * 65536.0) - 128) && q_ema < tune_t'(int'(QT * 65536.0) + 128),
          $sformatf("EMA tune %0.4f", real'(q_ema) / 65536.0));
    check(q_wlc > tune_t'(int'(QT * 65536.0) - 128) && q_wlc < tune_t'(int'(QT * 65536.0) + 128),
          $sformatf("WLC tune %0.4f", real'(q_wlc) / 65536.0));
    check(!overflow, "no overflow at 1 ms windows");

    // (B) tune taken above one half: sidebands miss the band
    cfg_above_half = 1;
    wait (n_frames == 12);
    @(negedge clk);
    check(tune_unreliable == 1, "unreliable result expected for q = 0.68");

    // (C) windows far shorter than the processing time
    // the window in progress still ends at WIN samples, then short ones follow
    cfg_win_len = 14'd64;
    for (int i = 0; i < 2 * 40 * WIN && !overflow; i++) @(posedge clk);
    check(overflow, "overflow expected with 64-sample windows");

    // (D) automatic window length during a fast f0 ramp
    cfg_win_len  = 14'd8192;
    cfg_win_auto = 1;
    f0_r         = real'(cfg_f0);
    ramp         = 1;
    wait (n_auto == 8);
    $display("automatic windows near 3125 samples: %0d of %0d", n_auto_ok, n_auto - 2);
    check(n_auto_ok >= 5, "window shortened to the 10 kHz tolerance");

    $display("banks %0d/%0d, padded loads %0d, multi-batch spectra %0d, inverted/upright sidebands %0d/%0d",
             n_bank0, n_bank1, n_pad, n_multi, n_invert, n_upright);
    $display("WLC with several peaks %0d, medians %0d (rejected %0d), Kalman %0d, reliable/unreliable %0d/%0d",
             n_wlc_multi, n_med, n_med_rejected, n_kf, n_rel, n_unrel);
    $display("longest window processing: %0d clocks (window: %0d clocks)", lat_max, 40 * WIN);
    check(lat_max > 0 && lat_max < 40 * WIN, "a window is processed within one window time");
    check(n_bank0 > 0 && n_bank1 > 0, "both buffer banks used");
    check(n_pad > 0, "zero padding of the last batch");
    check(n_multi > 0, "averaging over several batches");
    check(n_invert > 0, "inverted sideband mapped");
    check(n_wlc_multi > 0, "WLC chose among several peaks");
    check(n_med > 0, "median filter output");
    check(n_med_rejected > 0, "median filter replaced an input");
    check(n_kf > 0, "Kalman fusion ran");
    check(n_rel > 0 && n_unrel > 0, "both flag values");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
