// ema_peak: per-bin exponential moving average of the mapped spectrum and the
// position of its global maximum (the raw "EMA tune").
//
// For every incoming bin j of P_t the block updates
//   EMA_t[j] = EMA_{t-1}[j] + alpha * (P_t[j] - EMA_{t-1}[j])
// which equals alpha*P_t + (1-alpha)*EMA_{t-1}, with alpha in Q1.16. The
// first spectrum after reset or clear initialises the average. While the
// bins stream past, the largest updated value inside [reg_lo, reg_hi] is
// tracked (the lowest bin wins ties); one cycle after in_last, tune_valid
// pulses with tune = j_max / (2 NQ) in Q0.16.
//
// With NQ = 512 bins the tune is j * 64 in Q0.16 and below one half, so its
// six lowest bits and its top bit are always zero; they are kept so that every
// tune in the design has the same Q0.16 format.
//
// The EMA and the use of its global maximum as the EMA tune are the paper's.
// The initialisation and the tie rule are this design's choices.
module ema_peak
  import tune_pkg::*;
#(
  parameter int NQ = 512,
  parameter int QW = $clog2(NQ)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          in_valid,
  input  logic [QW-1:0] in_idx,
  input  psd_t          in_data,
  input  logic          in_last,
  input  frac16_t       alpha,
  input  logic [QW-1:0] reg_lo,
  input  logic [QW-1:0] reg_hi,
  output logic          tune_valid,
  output tune_t         tune
);
  psd_t ema [NQ];
  logic first;

  logic signed [PSD_W+1:0]  diff;
  logic signed [PSD_W+19:0] step;
  psd_t                     upd;
  psd_t                     best;
  logic [QW-1:0]            best_j;
  logic                     have;

  always_comb begin
    diff = (PSD_W+2)'(in_data) - (PSD_W+2)'(ema[in_idx]);
    step = ((PSD_W+20)'(diff) * (PSD_W+20)'(signed'({1'b0, alpha}))) >>> 16;
    upd  = first ? in_data : psd_t'((PSD_W+20)'(ema[in_idx]) + step);
  end

  wire in_reg = (in_idx >= reg_lo) && (in_idx <= reg_hi);
  wire better = in_reg && (!have || upd > best);

  always_ff @(posedge clk) begin
    if (in_valid) ema[in_idx] <= upd;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      first      <= 1'b1;
      best       <= '0;
      best_j     <= '0;
      have       <= 1'b0;
      tune_valid <= 1'b0;
      tune       <= '0;
    end else begin
      tune_valid <= 1'b0;
      if (clear) begin
        first <= 1'b1;
        have  <= 1'b0;
      end else if (in_valid) begin
        if (better) begin
          best   <= upd;
          best_j <= in_idx;
        end
        if (in_last) begin
          first      <= 1'b0;
          have       <= 1'b0;
          tune_valid <= 1'b1;
          tune       <= bin_to_tune(better ? int'(in_idx) : int'(best_j), NQ);
        end else begin
          have <= have | better;
        end
      end
    end
  end
endmodule
