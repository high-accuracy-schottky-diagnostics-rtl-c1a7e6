// tune_top: real-time betatron tune measurement backend for transverse
// Schottky signals.
//
// Data path, one STFT window ("frame") at a time:
//   ADC -> polyphase_decimator (band-pass, decimate by D)
//       -> pingpong_buffer (N_t samples per frame; N_t = cfg_win_len, or,
//          with cfg_win_auto, chosen by window_select from the f0 rate and
//          limited to [NB, cfg_win_len])
//       -> stft_psd (batched FFT power spectrum, averaged: P_bar)
//       -> gauss_smooth (Gaussian smoothing across bins)
//       -> tune_mapper (sidebands of all harmonics onto q in [0, 0.5): P_t)
//       -> ema_peak (EMA over frames, global maximum: raw EMA tune)
//          and wlc_select (local maxima of P_t, confidence choice)
//   raw EMA tune -> median_filter -> q_ema -> wlc_select (reference q_ref)
//   WLC tune     -> median_filter -> q_wlc
//   q_ema, q_wlc -> kalman_fusion -> q_pred -> post_proc -> result
//
// A frame is started when the ping-pong buffer holds a full window and the
// previous frame has left post_proc, so at most one frame is in the spectral
// chain; with the default sizes processing takes about a fifth of a window.
// If processing falls behind, the buffer drops samples and raises overflow.
// cfg_f0 and the band edges are sampled at the start of each frame; the time
// stamp is the decimated-sample count at the frame's first sample.
//
// Frequencies are Q16.16 in units of one STFT bin (decimated rate / NB),
// tunes Q0.16, factors Q1.16. One clock domain; the ADC presents a sample
// with adc_valid.
//
// Debug outputs: q_ref and wlc_npeaks show the WLC reference and the number
// of local maxima of the last window, tune_harmonic the harmonic used by the
// reliability check. The bank index of the ping-pong buffer is left open.
// rst_n is both the asynchronous reset of the registers and the disable of
// the concurrent assertion below, hence the lint note on a net used both
// ways; the assertion is not part of the circuit.
//
// The chain of stages is the paper's implementation outline; the frame
// hand-off, the one-frame-in-flight rule and the configuration ports are this
// design's choices.
module tune_top
  import tune_pkg::*;
#(
  parameter int D     = 40,
  parameter int TAPS  = 160,
  parameter int DEPTH = 8192,
  parameter int NB    = 1024,
  parameter int NQ    = 512,
  parameter int NT    = 5,
  parameter int MEDN  = 5,
  parameter int LW    = $clog2(DEPTH) + 1,
  parameter int QW    = $clog2(NQ)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          adc_valid,
  input  sample_t       adc_data,
  input  logic [LW-1:0] cfg_win_len,
  input  logic          cfg_win_auto,
  input  freq_t         cfg_f0_tol,
  input  freq_t         cfg_f0,
  input  freq_t         cfg_band_lo,
  input  freq_t         cfg_band_hi,
  input  frac16_t       cfg_alpha_ema,
  input  frac16_t       cfg_w_ref,
  input  frac16_t       cfg_k_wlc,
  input  frac16_t       cfg_alpha_kf,
  input  logic [QW-1:0] cfg_reg_lo,
  input  logic [QW-1:0] cfg_reg_hi,
  input  logic          cfg_above_half,
  input  logic [31:0]   cfg_lat_comp,
  input  logic          cfg_clear,
  output logic          tune_valid,
  output tune_t         tune_q,
  output logic          tune_unreliable,
  output logic [31:0]   tune_ts,
  output tune_t         q_ema,
  output tune_t         q_wlc,
  output frac16_t       w_ema,
  output tune_t         q_ref,
  output logic [QW:0]   wlc_npeaks,
  output logic [15:0]   tune_harmonic,
  output logic          overflow
);
  localparam int AW = $clog2(DEPTH);

  // ---------------- acquisition ----------------
  logic    dec_valid;
  sample_t dec_data;
  polyphase_decimator #(.D(D), .TAPS(TAPS)) u_dec (
    .clk, .rst_n,
    .in_valid (adc_valid), .in_data (adc_data),
    .out_valid(dec_valid), .out_data(dec_data)
  );

  logic          fr_ready, fr_release;
  logic [LW-1:0] fr_len;
  logic [31:0]   fr_ts;
  logic [AW-1:0] fr_addr;
  sample_t       fr_data;
  logic [LW-1:0] ws_nt, win_len;
  logic          psd_start;

  // window length from the f0 rate seen between successive frames; f0 and
  // the decimated-sample count are taken at the same clock
  logic [31:0] n_dec;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)         n_dec <= '0;
    else if (dec_valid) n_dec <= n_dec + 32'd1;
  end

  window_select #(.LW(LW)) u_win (
    .clk, .rst_n,
    .sample (psd_start), .f0 (cfg_f0), .t_end (n_dec),
    .tol (cfg_f0_tol), .nt_min (LW'(NB)), .nt_max (cfg_win_len),
    .nt (ws_nt), .nt_valid ()
  );
  assign win_len = cfg_win_auto ? ws_nt : cfg_win_len;

  pingpong_buffer #(.DEPTH(DEPTH)) u_pp (
    .clk, .rst_n,
    .wr_valid (dec_valid), .wr_data (dec_data), .win_len (win_len),
    .frame_ready (fr_ready), .frame_bank (), .frame_len (fr_len),
    .frame_ts (fr_ts), .rd_addr (fr_addr), .rd_data (fr_data),
    .frame_release (fr_release), .overflow (overflow)
  );

  // ---------------- frame control ----------------
  logic        in_flight;
  logic [31:0] ts_q;
  freq_t       f0_q, lo_q, hi_q;
  logic        post_done;
  logic        stft_busy;
  assign psd_start = fr_ready && !in_flight && !stft_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_flight <= 1'b0;
      ts_q      <= '0;
      f0_q      <= '0;
      lo_q      <= '0;
      hi_q      <= '0;
    end else begin
      if (psd_start) begin
        in_flight <= 1'b1;
        ts_q      <= fr_ts;
        f0_q      <= cfg_f0;
        lo_q      <= cfg_band_lo;
        hi_q      <= cfg_band_hi;
      end else if (post_done) begin
        in_flight <= 1'b0;
      end
    end
  end

  // ---------------- spectral processing ----------------
  logic psd_valid, psd_last;
  psd_t psd_data;
  stft_psd #(.NB(NB), .NBATCH_MAX(DEPTH / NB)) u_psd (
    .clk, .rst_n,
    .start (psd_start), .win_len (fr_len),
    .buf_addr (fr_addr), .buf_data (fr_data), .release_buf (fr_release),
    .busy (stft_busy),
    .psd_valid, .psd_data, .psd_last
  );

  logic sm_valid, sm_last;
  psd_t sm_data;
  gauss_smooth #(.NT(NT)) u_smooth (
    .clk, .rst_n,
    .in_valid (psd_valid), .in_data (psd_data), .in_last (psd_last),
    .out_valid (sm_valid), .out_data (sm_data), .out_last (sm_last)
  );

  logic          pt_valid, pt_last, map_busy;
  logic [QW-1:0] pt_idx;
  psd_t          pt_data;
  tune_mapper #(.NB(NB), .NQ(NQ)) u_map (
    .clk, .rst_n,
    .in_valid (sm_valid), .in_data (sm_data), .in_last (sm_last),
    .f0 (f0_q), .band_lo (lo_q), .band_hi (hi_q),
    .busy (map_busy),
    .out_valid (pt_valid), .out_idx (pt_idx), .out_data (pt_data), .out_last (pt_last)
  );

  // ---------------- enhanced peak detection ----------------
  logic  ema_valid;
  tune_t ema_raw;
  ema_peak #(.NQ(NQ)) u_ema (
    .clk, .rst_n, .clear (cfg_clear),
    .in_valid (pt_valid), .in_idx (pt_idx), .in_data (pt_data), .in_last (pt_last),
    .alpha (cfg_alpha_ema), .reg_lo (cfg_reg_lo), .reg_hi (cfg_reg_hi),
    .tune_valid (ema_valid), .tune (ema_raw)
  );

  logic  mema_valid;
  tune_t mema_data;
  median_filter #(.N(MEDN)) u_med_ema (
    .clk, .rst_n, .clear (cfg_clear),
    .in_valid (ema_valid), .in_data (ema_raw),
    .out_valid (mema_valid), .out_data (mema_data)
  );

  logic        have_wlc;
  tune_t       q_wlc_prev;
  logic        wlc_done, wlc_busy;
  tune_t       wlc_raw;
  wlc_select #(.NQ(NQ)) u_wlc (
    .clk, .rst_n,
    .in_valid (pt_valid), .in_idx (pt_idx), .in_data (pt_data), .in_last (pt_last),
    .reg_lo (cfg_reg_lo), .reg_hi (cfg_reg_hi),
    .start (mema_valid), .q_ema (mema_data),
    .q_prev (have_wlc ? q_wlc_prev : mema_data),
    .w (cfg_w_ref), .k (cfg_k_wlc),
    .busy (wlc_busy), .done (wlc_done), .q_wlc (wlc_raw), .q_ref (q_ref), .npeaks (wlc_npeaks)
  );

  logic  mwlc_valid;
  tune_t mwlc_data;
  median_filter #(.N(MEDN)) u_med_wlc (
    .clk, .rst_n, .clear (cfg_clear),
    .in_valid (wlc_done), .in_data (wlc_raw),
    .out_valid (mwlc_valid), .out_data (mwlc_data)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      have_wlc   <= 1'b0;
      q_wlc_prev <= '0;
      q_ema      <= '0;
    end else begin
      if (cfg_clear) have_wlc <= 1'b0;
      if (mema_valid) q_ema <= mema_data;
      if (mwlc_valid) begin
        have_wlc   <= 1'b1;
        q_wlc_prev <= mwlc_data;
      end
    end
  end
  assign q_wlc = q_wlc_prev;

  // ---------------- fusion and post-processing ----------------
  logic    kf_done, kf_busy;
  tune_t   kf_x;
  kalman_fusion u_kf (
    .clk, .rst_n, .clear (cfg_clear),
    .start (mwlc_valid), .z1 (q_ema), .z2 (mwlc_data), .alpha (cfg_alpha_kf),
    .busy (kf_busy), .done (kf_done), .x (kf_x), .w1 (w_ema)
  );

  logic        pp_busy;
  post_proc u_post (
    .clk, .rst_n,
    .start (kf_done), .q (kf_x), .above_half (cfg_above_half),
    .f0 (f0_q), .band_lo (lo_q), .band_hi (hi_q),
    .ts_in (ts_q), .lat_comp (cfg_lat_comp),
    .busy (pp_busy), .done (post_done), .q_out (tune_q),
    .unreliable (tune_unreliable), .ts_out (tune_ts), .harmonic (tune_harmonic)
  );
  assign tune_valid = post_done;

  // A frame never enters the spectral chain while another is in it.
  a_one_frame: assert property (@(posedge clk) disable iff (!rst_n)
    psd_start |-> !(map_busy || wlc_busy || kf_busy || pp_busy))
    else $error("frame started while the chain is busy");
endmodule
