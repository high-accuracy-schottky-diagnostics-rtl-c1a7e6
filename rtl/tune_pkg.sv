// tune_pkg: types, widths and constant functions shared by the Schottky tune
// measurement pipeline.
//
// Number formats used across the design:
//   sample_t  signed 16-bit ADC / decimated sample.
//   psd_t     unsigned 48-bit power spectral density value (arbitrary units).
//   tune_t    unsigned Q0.16 fractional tune (0x8000 = 0.5).
//   frac16_t  unsigned 17-bit Q1.16 weight/factor (0x10000 = 1.0), used for the
//             EMA factor alpha, the reference weight w and the WLC weight k.
//   freq_t    unsigned Q16.16 frequency in units of one STFT bin
//             (delta_f = decimated sample rate / N_b).
// The constant functions build the band-pass decimation filter, the Gaussian
// smoothing kernel and the smoothing window size N_f = max(3, 2*floor(N_T/2)+1)
// at elaboration time, so no coefficient tables are stored as data files.
package tune_pkg;

  localparam int SAMP_W  = 16;
  localparam int PSD_W   = 48;
  localparam int TUNE_W  = 16;
  localparam int FRAC_W  = 17;
  localparam int FREQ_W  = 32;
  localparam int COEF_W  = 18;   // decimation filter coefficients, Q1.17
  localparam int GCOEF_W = 17;   // Gaussian kernel coefficients, Q1.16

  typedef logic signed [SAMP_W-1:0] sample_t;
  typedef logic        [PSD_W-1:0]  psd_t;
  typedef logic        [TUNE_W-1:0] tune_t;
  typedef logic        [FRAC_W-1:0] frac16_t;
  typedef logic        [FREQ_W-1:0] freq_t;
  typedef logic signed [COEF_W-1:0] coef_t;

  localparam frac16_t ONE16 = frac16_t'(17'h10000);

  // Largest number of taps a filter built by the functions below may have.
  localparam int MAX_TAPS = 512;
  localparam int MAX_NF   = 63;
  typedef coef_t                      coef_arr_t  [MAX_TAPS];
  typedef logic [GCOEF_W-1:0]         gcoef_arr_t [MAX_NF];

  localparam real PI = 3.14159265358979323846;

  // Smoothing window size from the number of bins N_T covered by the
  // transverse sideband: N_f = max(3, 2*floor(N_T/2) + 1).
  function automatic int nf_from_nt(input int nt);
    int nf;
    nf = 2 * (nt / 2) + 1;
    return (nf < 3) ? 3 : nf;
  endfunction

  // Gaussian kernel of nf taps with sigma = (nf-1)/3, normalised to a sum of
  // 1.0 in Q1.16. Entries beyond nf are zero.
  function automatic gcoef_arr_t gauss_coefs(input int nf);
    gcoef_arr_t g;
    real sigma, s, v [MAX_NF];
    int  h, acc;
    sigma = real'(nf - 1) / 3.0;
    h = (nf - 1) / 2;
    s = 0.0;
    for (int i = 0; i < MAX_NF; i++) begin
      v[i] = (i < nf) ? $exp(-(real'(i - h) ** 2) / (2.0 * sigma * sigma)) : 0.0;
      s += v[i];
    end
    acc = 0;
    for (int i = 0; i < MAX_NF; i++) begin
      g[i] = GCOEF_W'($rtoi(v[i] / s * 65536.0 + 0.5));
      acc += int'(g[i]);
    end
    // put the rounding remainder on the centre tap so the gain is exactly 1.0
    g[h] = GCOEF_W'(int'(g[h]) + 65536 - acc);
    return g;
  endfunction

  // Hamming-windowed band-pass FIR: a low-pass prototype of half-width bw/2
  // shifted to centre fc (both as fractions of the input sample rate).
  // Pass-band gain 1.0 in Q1.17.
  function automatic coef_arr_t bandpass_coefs(input int taps, input real fc, input real bw);
    coef_arr_t c;
    real m, x, lp, win;
    m = real'(taps - 1) / 2.0;
    for (int i = 0; i < MAX_TAPS; i++) begin
      if (i < taps) begin
        x   = real'(i) - m;
        lp  = (x == 0.0) ? bw : $sin(PI * bw * x) / (PI * x);
        win = 0.54 - 0.46 * $cos(2.0 * PI * real'(i) / real'(taps - 1));
        c[i] = coef_t'($rtoi(2.0 * lp * win * $cos(2.0 * PI * fc * x) * 131072.0));
      end else begin
        c[i] = '0;
      end
    end
    return c;
  endfunction

  // Q0.16 tune of mapped-spectrum bin j when nq bins span the tune range [0, 0.5).
  function automatic tune_t bin_to_tune(input int j, input int nq);
    return tune_t'((j * 32768) / nq);
  endfunction

endpackage
