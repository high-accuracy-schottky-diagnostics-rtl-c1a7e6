// polyphase_decimator: band-pass FIR decimator that brings the oversampled ADC
// stream down to the bandpass-sampling rate.
//
// The FIR y[m] = sum_i h[i] x[mD - i] is computed in transposed polyphase
// form. Each input sample x[t] contributes to the L = TAPS/D outputs that are
// still open; with p = (mD - t) mod D the phase of the sample, accumulator j
// (output m0+j) adds h[jD + p] * x[t]. When the phase-0 sample arrives,
// accumulator 0 is complete: it is emitted and the accumulators shift down.
// So the block needs L multipliers running at the input rate instead of
// TAPS multipliers at the output rate.
//
// Interface: in_valid/in_data (one signed sample per strobe); out_valid is a
// one-cycle strobe every D accepted inputs, out_data = acc >>> 17, saturated.
// Latency: out_data is registered, one clock after the phase-0 input.
//
// The paper asks for a polyphase decimation filter that band-pass filters the
// BPM band before decimation. The coefficient design (Hamming-windowed
// band-pass sinc at 36 MHz, 3 MHz wide, for a 250 MS/s ADC) and D = 40, which
// gives 6.25 MS/s inside the bandpass-sampling range for a 34.5-37.5 MHz band,
// are this design's choices.
module polyphase_decimator
  import tune_pkg::*;
#(
  parameter int  D       = 40,
  parameter int  TAPS    = 160,
  parameter real FC_NORM = 36.0 / 250.0,
  parameter real BW_NORM = 3.0 / 250.0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    in_valid,
  input  sample_t in_data,
  output logic    out_valid,
  output sample_t out_data
);
  localparam int L     = TAPS / D;
  localparam int ACC_W = SAMP_W + COEF_W + $clog2(TAPS) + 1;
  localparam int PW    = (D > 1) ? $clog2(D) : 1;
  localparam coef_arr_t H = bandpass_coefs(TAPS, FC_NORM, BW_NORM);

  typedef logic signed [ACC_W-1:0] acc_t;

  acc_t          acc [L];
  logic [PW-1:0] phase;    // counts D-1 down to 0

  function automatic sample_t sat(input acc_t a);
    acc_t s;
    s = a >>> (COEF_W - 1);
    if (s > acc_t'(32767))       return sample_t'(16'sd32767);
    else if (s < acc_t'(-32768)) return sample_t'(-16'sd32768);
    else                         return sample_t'(s);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= PW'(D - 1);
      out_valid <= 1'b0;
      out_data  <= '0;
      for (int j = 0; j < L; j++) acc[j] <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        if (phase == '0) begin
          out_valid <= 1'b1;
          out_data  <= sat(acc[0] + acc_t'(H[0] * in_data));
          for (int j = 0; j < L - 1; j++)
            acc[j] <= acc[j+1] + acc_t'(H[(j+1)*D] * in_data);
          acc[L-1] <= '0;
          phase    <= PW'(D - 1);
        end else begin
          for (int j = 0; j < L; j++)
            acc[j] <= acc[j] + acc_t'(H[j*D + int'(phase)] * in_data);
          phase <= phase - 1'b1;
        end
      end
    end
  end

  initial begin
    assert (TAPS % D == 0) else $error("TAPS must be a multiple of D");
    assert (TAPS <= MAX_TAPS) else $error("TAPS too large");
  end
endmodule
