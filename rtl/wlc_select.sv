// wlc_select: Weighted Linear Combination (WLC) peak choice.
//
// While P_t streams in, every local maximum inside [reg_lo, reg_hi]
// (P[j] > P[j-1] and P[j] >= P[j+1]) is stored with its tune and amplitude,
// and the largest amplitude amax is tracked. On start the block forms the
// reference tune
//   q_ref = w * q_ema + (1 - w) * q_prev
// from the filtered EMA tune and the previous WLC tune, then in two passes over
// the list finds the largest distance dmax = max |q_i - q_ref| and the maximum
// with the highest confidence
//   conf_i = k * (1 - d_i/dmax) + (1 - k) * a_i/amax .
// Since dmax and amax are common to all maxima, conf_i * dmax * amax =
// k (dmax - d_i) amax + (1 - k) a_i dmax is compared instead, so no divider is
// needed. done pulses with q_wlc; with no local maximum q_wlc = q_prev, with
// dmax = 0 the amplitude alone decides.
//
// Interface: in_valid/in_idx/in_data/in_last (the same stream ema_peak sees),
// start with q_ema, q_prev, w, k (Q1.16). Timing: 2 + 2 * npeaks cycles
// from start to done. The list must be complete (in_last seen) before start.
//
// npeaks is QW+1 bits wide; at most NQ/2 maxima fit in NQ bins, so its top
// bit stays zero.
//
// q_ref, the two normalised factors and the confidence formula are the
// paper's; the local-maximum rule and normalising by the largest value are
// this design's reading of "normalized to the range [0,1]".
module wlc_select
  import tune_pkg::*;
#(
  parameter int NQ    = 512,
  parameter int MAXPK = NQ / 2,
  parameter int QW    = $clog2(NQ)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  input  logic [QW-1:0] in_idx,
  input  psd_t          in_data,
  input  logic          in_last,
  input  logic [QW-1:0] reg_lo,
  input  logic [QW-1:0] reg_hi,
  input  logic          start,
  input  tune_t         q_ema,
  input  tune_t         q_prev,
  input  frac16_t       w,
  input  frac16_t       k,
  output logic          busy,
  output logic          done,
  output tune_t         q_wlc,
  output tune_t         q_ref,
  output logic [QW:0]   npeaks
);
  localparam int PKW = $clog2(MAXPK + 1);
  localparam int CW  = FRAC_W + TUNE_W + PSD_W + 1;

  tune_t pk_q [2**PKW];
  psd_t  pk_a [2**PKW];
  logic [PKW-1:0] cnt;
  psd_t  amax;

  // streaming local-maximum detector: candidate is the previous bin
  psd_t          p1, p2;        // P[j-1], P[j-2]
  logic [QW-1:0] j1;
  logic          v1, v2;        // p1/p2 hold in-region bins of this spectrum
  wire in_reg = (in_idx >= reg_lo) && (in_idx <= reg_hi);

  // candidate p1 is a maximum if p1 > p2 (or p2 absent: region edge) and
  // p1 >= current (or current absent)
  wire cand_now  = in_valid && v1 && (!v2 || p1 > p2) && (!in_reg || p1 >= in_data);
  wire cand_last = in_valid && in_last && in_reg && (!v1 || in_data > p1);

  typedef enum logic [1:0] {S_COLLECT, S_DIST, S_CONF, S_DONE} state_t;
  state_t state;
  logic [PKW-1:0] i;
  tune_t          dmax;
  logic [CW-1:0]  best_c;
  tune_t          best_q;
  logic           have;

  function automatic tune_t absdiff(input tune_t a, input tune_t b);
    return (a > b) ? a - b : b - a;
  endfunction

  tune_t         di;
  logic [CW-1:0] ci;
  always_comb begin
    di = absdiff(pk_q[i], q_ref);
    ci = CW'(k) * CW'(dmax - di) * CW'(amax) + CW'(ONE16 - k) * CW'(pk_a[i]) * CW'(dmax);
    if (dmax == '0) ci = CW'(pk_a[i]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_COLLECT;
      cnt    <= '0;
      amax   <= '0;
      p1     <= '0;
      p2     <= '0;
      j1     <= '0;
      v1     <= 1'b0;
      v2     <= 1'b0;
      i      <= '0;
      dmax   <= '0;
      best_c <= '0;
      best_q <= '0;
      have   <= 1'b0;
      done   <= 1'b0;
      q_wlc  <= '0;
      q_ref  <= '0;
      npeaks <= '0;
    end else begin
      done <= 1'b0;
      // collection runs whenever a spectrum streams in
      if (in_valid) begin
        if (cand_now && cnt < PKW'(MAXPK)) begin
          pk_q[cnt] <= bin_to_tune(int'(j1), NQ);
          pk_a[cnt] <= p1;
        end
        if (cand_last && !(cand_now) && cnt < PKW'(MAXPK)) begin
          pk_q[cnt] <= bin_to_tune(int'(in_idx), NQ);
          pk_a[cnt] <= in_data;
        end
        // (cand_now and cand_last cannot both hold: cand_last needs in_data > p1)
        if ((cand_now || cand_last) && cnt < PKW'(MAXPK)) begin
          cnt <= cnt + 1'b1;
          if ((cand_now ? p1 : in_data) > amax) amax <= cand_now ? p1 : in_data;
        end
        p2 <= p1;
        v2 <= v1;
        p1 <= in_data;
        v1 <= in_reg;
        j1 <= in_idx;
        if (in_last) begin
          v1 <= 1'b0;
          v2 <= 1'b0;
        end
      end
      unique case (state)
        S_COLLECT: if (start) begin
          q_ref  <= tune_t'((34'(w) * 34'(q_ema) + 34'(ONE16 - w) * 34'(q_prev)) >> 16);
          i      <= '0;
          dmax   <= '0;
          state  <= S_DIST;
        end
        S_DIST: begin
          if (i == cnt) begin
            i     <= '0;
            have  <= 1'b0;
            state <= S_CONF;
          end else begin
            if (di > dmax) dmax <= di;
            i <= i + 1'b1;
          end
        end
        S_CONF: begin
          if (i == cnt) begin
            state <= S_DONE;
          end else begin
            if (!have || ci > best_c) begin
              best_c <= ci;
              best_q <= pk_q[i];
              have   <= 1'b1;
            end
            i <= i + 1'b1;
          end
        end
        S_DONE: begin
          done   <= 1'b1;
          q_wlc  <= have ? best_q : q_prev;
          npeaks <= (QW+1)'(cnt);
          cnt    <= '0;
          amax   <= '0;
          state  <= S_COLLECT;
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  assign busy = (state != S_COLLECT);
endmodule
